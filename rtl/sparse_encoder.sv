// sparse_encoder: converts a latched multi-hot vector into the index of each
// 1, one index per cycle.
//
// After latching, the matchline outputs of an array form a multi-hot
// vector whose set bits are the selected rows. The sparse encoder turns it
// into a list of row indices (7 bits for a 128-row array). Here it holds
// the vector in a register, presents the index of the lowest set bit on a
// valid/ready port, and clears that bit when the index is taken, so n set
// bits leave in n handshake cycles, lowest index first. The ordering and the
// handshake are this design's choices.
//
// `load` copies `vec` into the register (overwriting what is left);
// `pending` is high while any bit remains.
module sparse_encoder #(
  parameter int W    = 128,
  localparam int IW  = (W > 1) ? $clog2(W) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [W-1:0]  vec,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [IW-1:0] out_idx,
  output logic          pending
);
  logic [W-1:0] bits;

  always_comb begin
    out_idx = '0;
    for (int i = W - 1; i >= 0; i--)
      if (bits[i]) out_idx = IW'(i);
  end

  assign pending   = (bits != '0);
  assign out_valid = pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      bits <= '0;
    else if (load)                   bits <= vec;
    else if (out_valid && out_ready) bits[out_idx] <= 1'b0;
  end
endmodule
