// bank_unit: bank unit (BU) of the coarse CAM, a grid of N_AU array units
// (16 x 16 = 256 in the published design) behind one address wrapper.
//
// All AUs of the bank see the same search pulse, query code and latch
// strobe, so they search in parallel. Their index streams are merged by an
// addr_wrapper that prepends the AU number, giving {AU, row} addresses.
// Writes carry a {AU, row} address and go to the addressed AU only. The
// lock input is one bit per AU.
//
// Timing: as cam_au plus one register stage in the wrapper. `pending` is
// high while any AU still holds indices or the wrapper holds one.
module bank_unit #(
  parameter int N_AU  = 256,
  parameter int ROWS  = 128,
  parameter int COLS  = 128,
  parameter int TSTEP = 1,
  localparam int RA_W = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int AU_W = (N_AU > 1) ? $clog2(N_AU) : 1,
  localparam int OA_W = AU_W + RA_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            we,
  input  logic [OA_W-1:0] waddr,
  input  logic [COLS-1:0] wdata,
  input  logic            wvalid,
  input  logic            search,
  input  logic [COLS-1:0] sl,
  input  logic            latch,
  input  logic [N_AU-1:0] lock,
  output logic            idx_valid,
  input  logic            idx_ready,
  output logic [OA_W-1:0] idx,
  output logic            pending
);
  logic [N_AU-1:0]            au_valid, au_ready, au_pending;
  logic [N_AU-1:0][RA_W-1:0]  au_idx;
  logic [AU_W-1:0]            w_au;

  assign w_au = waddr[OA_W-1:RA_W];

  for (genvar a = 0; a < N_AU; a++) begin : g_au
    cam_au #(.ROWS(ROWS), .COLS(COLS), .TSTEP(TSTEP)) u_au (
      .clk      (clk),
      .rst_n    (rst_n),
      .clr      (1'b0),
      .we       (we && (int'(w_au) == a)),
      .waddr    (waddr[RA_W-1:0]),
      .wdata    (wdata),
      .wvalid   (wvalid),
      .search   (search),
      .sl       (sl),
      .latch    (latch),
      .lock     (lock[a]),
      .idx_valid(au_valid[a]),
      .idx_ready(au_ready[a]),
      .idx      (au_idx[a]),
      .pending  (au_pending[a])
    );
  end

  addr_wrapper #(.N(N_AU), .PW(RA_W)) u_wrap (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (au_valid),
    .in_ready (au_ready),
    .in_data  (au_idx),
    .out_valid(idx_valid),
    .out_ready(idx_ready),
    .out_data (idx)
  );

  assign pending = (|au_pending) || idx_valid;
endmodule
