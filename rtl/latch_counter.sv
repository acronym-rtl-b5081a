// latch_counter: the counter that times the latching of matchline outputs
// (time-based approximate top-k selection).
//
// Instead of counting how many matchlines have risen, ACRONYM latches all
// matchline outputs a fixed, programmable time after the search starts. The
// time is chosen offline from the distance-to-discharge-time relation of
// the array and sets the approximate pool size; it can be changed at any
// time. This counter is the only logic that approach needs.
//
// `start` (one cycle, the same cycle as the CAM search pulse) clears the
// count; in the k-th cycle after it, count = k. `latch` is high for one
// cycle, in the cycle where count equals latch_time, so that the latch
// registers capture ml_out at the end of that cycle: with the cam_array
// timing model this captures every row whose Hamming distance is below
// latch_time. A latch_time of 0 is treated as 1. `busy` is high from start
// until the latch cycle.
module latch_counter #(
  parameter int T_W = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [T_W-1:0] latch_time,
  output logic           latch,
  output logic           busy,
  output logic [T_W-1:0] count
);
  logic [T_W-1:0] lt;
  assign lt    = (latch_time == '0) ? T_W'(1) : latch_time;
  assign latch = busy && (count == lt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      count <= '0;
    end else if (start) begin
      busy  <= 1'b1;
      count <= T_W'(1);
    end else if (busy) begin
      if (latch) busy <= 1'b0;
      else       count <= count + 1'b1;
    end
  end
endmodule
