// refine_cam_unit: refinement CAM of one ACRONYM module. It takes the
// refinement codes of the coarse candidate pool, searches them with the
// refinement part of the query code and emits the addresses of the final
// approximate top-k.
//
// Structure: N_RAU array units (cam_au, ROWS x REFINE_W each) give
// N_RAU*ROWS candidate rows; a tag memory beside them keeps, for each row,
// the item address the code came from; an address wrapper merges the AUs'
// index streams; a latch counter times the latching. The paper gives the
// block's function (written with the pool's codes, searched in memory,
// multi-hot result of the top-k); its size, the tag memory and the
// sequencing below are this design's.
//
// Sequence for one query:
//  1. `clear` empties the array (all rows invalid) and resets the write
//     pointer.
//  2. Each cand_valid cycle writes cand_code into the next free row and
//     cand_addr into its tag. Candidates beyond the capacity are dropped
//     and counted on `overflow` (pulse per dropped candidate).
//  3. `search_start` with the refinement query code on `q_code` searches
//     all written rows; after `latch_time` cycles the matchline outputs are
//     latched (rows with distance < latch_time).
//  4. The selected rows leave as item addresses on out_valid/out_ready/
//     out_addr; `done` pulses when the last one has been taken.
// Steps 2 and 3 must not overlap; the search controller orders them.
module refine_cam_unit #(
  parameter int N_RAU    = 64,
  parameter int ROWS     = 128,
  parameter int REFINE_W = 128,
  parameter int A_W      = 21,     // item address width of the module
  parameter int TSTEP    = 1,
  parameter int T_W      = 16,
  localparam int RA_W = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int AU_W = (N_RAU > 1) ? $clog2(N_RAU) : 1,
  localparam int L_W  = AU_W + RA_W,
  localparam int CAP  = N_RAU * ROWS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                cand_valid,
  input  logic [A_W-1:0]      cand_addr,
  input  logic [REFINE_W-1:0] cand_code,
  input  logic                search_start,
  input  logic [REFINE_W-1:0] q_code,
  input  logic [T_W-1:0]      latch_time,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [A_W-1:0]      out_addr,
  output logic                done,
  output logic                overflow,
  output logic [L_W:0]        n_written,
  output logic                busy
);
  logic                       latch, cnt_busy, draining, all_empty;
  logic [N_RAU-1:0]           au_valid, au_ready, au_pending;
  logic [N_RAU-1:0][RA_W-1:0] au_idx;
  logic [L_W-1:0]             w_loc, o_loc;
  logic                       full, wr;
  logic [A_W-1:0]             tags [CAP];

  assign full     = (int'(n_written) >= CAP);
  assign wr       = cand_valid && !full;
  assign overflow = cand_valid && full;
  assign w_loc    = n_written[L_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     n_written <= '0;
    else if (clear) n_written <= '0;
    else if (wr)    n_written <= n_written + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (wr) tags[w_loc] <= cand_addr;
  end

  latch_counter #(.T_W(T_W)) u_cnt (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (search_start),
    .latch_time(latch_time),
    .latch     (latch),
    .busy      (cnt_busy),
    .count     ()
  );

  for (genvar a = 0; a < N_RAU; a++) begin : g_au
    cam_au #(.ROWS(ROWS), .COLS(REFINE_W), .TSTEP(TSTEP)) u_au (
      .clk      (clk),
      .rst_n    (rst_n),
      .clr      (clear),
      .we       (wr && (int'(w_loc[L_W-1:RA_W]) == a)),
      .waddr    (w_loc[RA_W-1:0]),
      .wdata    (cand_code),
      .wvalid   (1'b1),
      .search   (search_start),
      .sl       (q_code),
      .latch    (latch),
      .lock     (1'b0),
      .idx_valid(au_valid[a]),
      .idx_ready(au_ready[a]),
      .idx      (au_idx[a]),
      .pending  (au_pending[a])
    );
  end

  addr_wrapper #(.N(N_RAU), .PW(RA_W)) u_wrap (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (au_valid),
    .in_ready (au_ready),
    .in_data  (au_idx),
    .out_valid(out_valid),
    .out_ready(out_ready),
    .out_data (o_loc)
  );
  assign out_addr = tags[o_loc];

  assign all_empty = !(|au_pending) && !out_valid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     draining <= 1'b0;
    else if (latch)                 draining <= 1'b1;
    else if (draining && all_empty) draining <= 1'b0;
  end
  assign done = draining && all_empty;
  assign busy = cnt_busy || draining;
endmodule
