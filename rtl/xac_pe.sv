// xac_pe: XOR-and-accumulate processing element of the query encoder.
//
// The projection matrix holds only +1 and -1, stored as one weight bit h
// (+1 -> 0, -1 -> 1). The PE forms psum_o = psum_i + (q XOR {W{h}}) + h:
// with h = 0 the query element is added unchanged, with h = 1 its one's
// complement plus a carry-in of 1 is added, i.e. the element is subtracted.
// No multiplier is needed. This is the PE of the published encoder figure
// (XOR gate, adder, weight bit fed to the carry-in).
//
// Dataflow is weight stationary: h is loaded once (w_load) and kept. The
// query element moves one PE to the right per cycle (q_o) and the partial
// sum moves one PE down per cycle (psum_o); both outputs are registered, so
// a PE adds one cycle of latency in each direction. Element and partial sum
// are both DATA_W bits (INT16 in the published design); the sum wraps.
module xac_pe #(
  parameter int DATA_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              w_load,   // load the stationary weight bit
  input  logic              w_in,     // 0 = +1, 1 = -1
  input  logic [DATA_W-1:0] q_i,      // query element from the left
  input  logic [DATA_W-1:0] psum_i,   // partial sum from above
  output logic [DATA_W-1:0] q_o,      // query element to the right
  output logic [DATA_W-1:0] psum_o    // partial sum downwards
);
  logic h;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h      <= 1'b0;
      q_o    <= '0;
      psum_o <= '0;
    end else begin
      if (w_load) h <= w_in;
      q_o    <= q_i;
      psum_o <= psum_i + (q_i ^ {DATA_W{h}}) + DATA_W'(h);
    end
  end
endmodule
