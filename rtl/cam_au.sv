// cam_au: CAM array unit (AU), the leaf of the coarse CAM hierarchy.
//
// An AU is one CAM array (cam_array, 128 x 128 in the published design)
// with a latch register on its matchline outputs and a sparse encoder. A
// search pulse broadcasts the query code to the search lines; when the
// shared latch counter raises `latch`, the matchline outputs are captured,
// forming a multi-hot vector of the rows whose distance is below the latch
// time. The sparse encoder then emits the row index of every captured row.
//
// While `lock` is high the AU is being written by the update controller and
// is left out of searches: its latched vector is forced to all zeros. This
// is the single-AU lock that lets insertions proceed without stalling the
// search of all other AUs.
//
// Interface: write port (we, waddr, wdata, wvalid; clr empties the array)
// straight into the array;
// search/sl/latch shared with all AUs; output stream idx_valid/idx_ready/idx
// (ROW_W bits). `pending` is high while indices remain to be emitted.
// Timing: indices appear from the cycle after `latch`, one per accepted
// handshake.
module cam_au #(
  parameter int ROWS  = 128,
  parameter int COLS  = 128,
  parameter int TSTEP = 1,
  localparam int RA_W = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clr,
  input  logic            we,
  input  logic [RA_W-1:0] waddr,
  input  logic [COLS-1:0] wdata,
  input  logic            wvalid,
  input  logic            search,
  input  logic [COLS-1:0] sl,
  input  logic            latch,
  input  logic            lock,
  output logic            idx_valid,
  input  logic            idx_ready,
  output logic [RA_W-1:0] idx,
  output logic            pending
);
  logic [ROWS-1:0] ml_out;

  cam_array #(.ROWS(ROWS), .COLS(COLS), .TSTEP(TSTEP)) u_array (
    .clk   (clk),
    .rst_n (rst_n),
    .clr   (clr),
    .we    (we),
    .waddr (waddr),
    .wdata (wdata),
    .wvalid(wvalid),
    .search(search),
    .sl    (sl),
    .ml_out(ml_out)
  );

  // the latch register is the sparse encoder's input register
  sparse_encoder #(.W(ROWS)) u_senc (
    .clk      (clk),
    .rst_n    (rst_n),
    .load     (latch),
    .vec      (lock ? '0 : ml_out),
    .out_valid(idx_valid),
    .out_ready(idx_ready),
    .out_idx  (idx),
    .pending  (pending)
  );
endmodule
