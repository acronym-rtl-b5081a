// cam_array: behavioural model of one binary CAM array (ROWS matchlines of
// COLS cells), the in-memory distance engine of ACRONYM.
//
// This file models an analog / non-volatile memory macro (FeFET or CMOS CAM
// cells, matchline precharge and an inverter per matchline); it is a
// behavioural model, not a circuit. It reproduces the digital behaviour the
// rest of the design relies on: every row is compared with the query on the
// search lines, all rows in parallel, and the inverter output ml_out of a
// row rises at a time that grows with the row's Hamming distance to the
// query. Rows closer to the query therefore reach 1 first, and latching the
// outputs at a chosen time selects, approximately, the rows within a
// distance threshold.
//
// Timing model: a search is started by a one-cycle pulse on `search` with
// the query on `sl`. In the k-th cycle after that pulse (k = 1, 2, ...),
// ml_out[r] is 1 when hd(r) < k * 1/TSTEP, i.e. a row at distance h rises
// in cycle TSTEP*h + 1 (one clock per unit of distance with the default
// TSTEP = 1, matching the published timing illustration where a row at
// distance 1 rises in cycle 2 and one at distance 2 in cycle 3). The real
// slope comes from array characterisation; TSTEP stands in for it. ml_out
// stays high until the next search.
//
// Write port: `we` writes `wdata` into row `waddr` and sets its valid flag
// to `wvalid`; deletion is a write with wvalid = 0. Rows that were never
// written or were deleted keep ml_out at 0 (the model's stand-in for a
// masked matchline; the paper does not say how deleted rows are excluded).
// A row written while a search is under way gets the largest distance, so it
// does not show up as a candidate of that search. `clr` invalidates all
// rows at once; the refinement CAM uses it to empty
// itself before the pool of the next query is written.
module cam_array #(
  parameter int ROWS  = 128,
  parameter int COLS  = 128,
  parameter int TSTEP = 1,
  localparam int RA_W = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int HD_W = $clog2(COLS + 1),
  localparam int EL_W = HD_W + $clog2(TSTEP + 1) + 1
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
  output logic [ROWS-1:0] ml_out
);
  logic [COLS-1:0] cells [ROWS];
  logic [ROWS-1:0] valid;
  logic [HD_W-1:0] hd [ROWS];
  logic [EL_W-1:0] elapsed;   // cycles since the search pulse, saturating
  logic            active;

  always_ff @(posedge clk) begin
    if (we) cells[waddr] <= wdata;
    if (search)
      for (int r = 0; r < ROWS; r++)
        hd[r] <= HD_W'($countones(cells[r] ^ sl));
    // a row written during a search, or in the cycle the search starts (its
    // distance would come from the old contents), is not a candidate
    if (we)
      hd[waddr] <= '1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid   <= '0;
      elapsed <= '0;
      active  <= 1'b0;
    end else begin
      if (clr)     valid <= '0;
      else if (we) valid[waddr] <= wvalid;
      if (search) begin
        active  <= 1'b1;
        elapsed <= EL_W'(1);
      end else if (active && (elapsed != '1)) begin
        elapsed <= elapsed + 1'b1;
      end
    end
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++)
      ml_out[r] = active && valid[r] &&
                  ((EL_W'(TSTEP) * EL_W'(hd[r])) < elapsed);
  end
endmodule
