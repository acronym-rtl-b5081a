// coarse_cam_unit: the coarse-search CAM of one ACRONYM module. It holds the
// coarse part of every item's code, searches all items in parallel and
// emits the addresses of the coarse candidate pool.
//
// Organisation (published): N_BU bank units (8 x 8 = 64) of N_AU array units
// (16 x 16 = 256) of ROWS rows (128), with an address wrapper at module
// level and a latch counter. Item address = {BU, AU, row} (6 + 8 + 7 = 21
// bits); it is also the address of the item's refinement code. The
// defaults are the published sizes (2,097,152 items); tests use small grids.
//
// Operation: `search_start` with the coarse query code on `din_q` starts a
// parallel search in every AU and starts the latch counter. After
// `latch_time` cycles every AU latches its matchline outputs (rows with
// Hamming distance < latch_time, except locked AUs and deleted rows) and the
// sparse encoders and address wrappers stream the candidate addresses out
// on valid_o / idx_b / idx_ready. `pool_done` pulses for one cycle when the
// last address of the search has been taken. A new search may start only
// after pool_done (the controller guarantees this).
//
// Write port (Fig. "CAM unit" names): ld_en writes din_b into row ld_addr
// and sets its valid flag to ld_valid (0 deletes the row). `lock_en` with
// `lock_au` (a global AU number {BU, AU}) excludes one AU from searches
// while it is written. The port names clk_in, rstn, ld_en, din_b, valid_o
// and idx_b are the published ones; the others are this design's.
module coarse_cam_unit #(
  parameter int N_BU  = 64,
  parameter int N_AU  = 256,
  parameter int ROWS  = 128,
  parameter int COLS  = 128,
  parameter int TSTEP = 1,
  parameter int T_W   = 16,
  localparam int RA_W = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int AU_W = (N_AU > 1) ? $clog2(N_AU) : 1,
  localparam int BU_W = (N_BU > 1) ? $clog2(N_BU) : 1,
  localparam int BA_W = AU_W + RA_W,
  localparam int A_W  = BU_W + BA_W
) (
  input  logic                 clk_in,
  input  logic                 rstn,
  // item load / delete
  input  logic                 ld_en,
  input  logic [A_W-1:0]       ld_addr,
  input  logic [COLS-1:0]      din_b,
  input  logic                 ld_valid,
  // AU lock during writes
  input  logic                 lock_en,
  input  logic [BU_W+AU_W-1:0] lock_au,
  // search
  input  logic                 search_start,
  input  logic [COLS-1:0]      din_q,
  input  logic [T_W-1:0]       latch_time,
  // candidate addresses out
  output logic                 valid_o,
  input  logic                 idx_ready,
  output logic [A_W-1:0]       idx_b,
  output logic                 pool_done,
  output logic                 busy
);
  logic                        latch, cnt_busy;
  logic [N_BU-1:0]             bu_valid, bu_ready, bu_pending;
  logic [N_BU-1:0][BA_W-1:0]   bu_idx;
  logic [BU_W-1:0]             w_bu, l_bu;
  logic [AU_W-1:0]             l_au;
  logic                        draining;

  assign w_bu = ld_addr[A_W-1:BA_W];
  assign l_bu = lock_au[BU_W+AU_W-1:AU_W];
  assign l_au = lock_au[AU_W-1:0];

  latch_counter #(.T_W(T_W)) u_cnt (
    .clk       (clk_in),
    .rst_n     (rstn),
    .start     (search_start),
    .latch_time(latch_time),
    .latch     (latch),
    .busy      (cnt_busy),
    .count     ()
  );

  for (genvar b = 0; b < N_BU; b++) begin : g_bu
    logic [N_AU-1:0] lock_vec;
    always_comb begin
      lock_vec = '0;
      if (lock_en && (int'(l_bu) == b)) lock_vec[l_au] = 1'b1;
    end
    bank_unit #(.N_AU(N_AU), .ROWS(ROWS), .COLS(COLS), .TSTEP(TSTEP)) u_bu (
      .clk      (clk_in),
      .rst_n    (rstn),
      .we       (ld_en && (int'(w_bu) == b)),
      .waddr    (ld_addr[BA_W-1:0]),
      .wdata    (din_b),
      .wvalid   (ld_valid),
      .search   (search_start),
      .sl       (din_q),
      .latch    (latch),
      .lock     (lock_vec),
      .idx_valid(bu_valid[b]),
      .idx_ready(bu_ready[b]),
      .idx      (bu_idx[b]),
      .pending  (bu_pending[b])
    );
  end

  addr_wrapper #(.N(N_BU), .PW(BA_W)) u_wrap (
    .clk      (clk_in),
    .rst_n    (rstn),
    .in_valid (bu_valid),
    .in_ready (bu_ready),
    .in_data  (bu_idx),
    .out_valid(valid_o),
    .out_ready(idx_ready),
    .out_data (idx_b)
  );

  // pool_done: first cycle after the latch in which no AU has indices left
  // and no address is held in a wrapper register
  logic all_empty;
  assign all_empty = !(|bu_pending) && !(|bu_valid) && !valid_o;
  always_ff @(posedge clk_in or negedge rstn) begin
    if (!rstn)                        draining <= 1'b0;
    else if (latch)                   draining <= 1'b1;
    else if (draining && all_empty)   draining <= 1'b0;
  end
  assign pool_done = draining && all_empty;
  assign busy      = cnt_busy || draining;
endmodule
