// fifo_sync: first-in first-out buffer with valid/ready ports on both sides.
//
// Used three times in one ACRONYM module: between the encoder and the coarse
// CAM unit (encoded queries), between the address generator and the
// refinement memory (candidate addresses, absorbing back-pressure from the
// slow memory read) and as the index buffer in front of the output bus. The
// published block diagram only names these buffers; depth, handshake and
// the single clock are this design's choices (the text says the first FIFO
// separates clock domains; here the whole module runs on one clock).
//
// Storage is a DEPTH-entry array with read and write pointers and an
// occupancy counter. A write is accepted when in_valid && in_ready
// (in_ready = not full); the head entry is shown on out_data whenever
// out_valid (not empty) and is removed when out_ready is high. A push and a
// pop may happen in the same cycle; there is no bypass, so data written in a
// cycle is visible at the output from the next cycle. overflow pulses when a write is offered while full (it is not
// accepted) and is used by the tests to see back-pressure happen.
module fifo_sync #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 16,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [AW:0]      count,
  output logic             overflow
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             push, pop;

  assign in_ready  = (int'(count) < DEPTH);
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign overflow  = in_valid && !in_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (int'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (pop)  rp <= (int'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // a pop never happens on an empty FIFO, a push never on a full one
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> count != '0);
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> int'(count) < DEPTH);
endmodule
