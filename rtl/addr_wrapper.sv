// addr_wrapper: merges N index streams into one and prepends the number of
// the source as an address header.
//
// In the hierarchical CAM organisation every array unit (AU) emits row
// indices of its selected rows. The address wrapper of a bank unit (BU)
// takes the streams of its AUs and prefixes each index with the AU number;
// the wrapper of the module does the same with the BU number. An index
// leaving the module is therefore the item's address {BU, AU, row}, which
// maps one-to-one onto the refinement memory. The published design gives
// the headers (8-bit AU, 6-bit BU); the round-robin arbitration between
// sources is this design's choice.
//
// The merged stream leaves through an output register, so an index is
// visible on out_data one cycle after it was taken from its source. The
// register is refilled in the same cycle it is emptied (full throughput).
// The grant pointer moves past the source that was served; in_ready[i] is
// high only for the granted source.
module addr_wrapper #(
  parameter int N  = 4,
  parameter int PW = 7,
  localparam int SW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        in_valid,
  output logic [N-1:0]        in_ready,
  input  logic [N-1:0][PW-1:0] in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [SW+PW-1:0]    out_data
);
  logic [SW-1:0] ptr, sel;
  logic          any, take;

  always_comb begin
    sel = '0;
    any = 1'b0;
    for (int k = N - 1; k >= 0; k--) begin
      logic [SW-1:0] i;
      i = SW'((int'(ptr) + k) % N);
      if (in_valid[i]) begin
        sel = i;
        any = 1'b1;
      end
    end
    take     = any && (!out_valid || out_ready);
    in_ready = '0;
    if (take) in_ready[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (take) begin
        ptr       <= (int'(sel) == N - 1) ? '0 : sel + 1'b1;
        out_valid <= 1'b1;
        out_data  <= {sel, in_data[sel]};
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end
endmodule
