// mem_addr_decoder: hierarchical address decoder of the refinement memory.
//
// The refinement memory has the same shape as the coarse CAM, so the
// candidate address {BU, AU, row} produced by the coarse CAM's address
// wrappers needs no translation: the decoder splits it into its three
// fields and decodes the BU and AU fields in parallel into one-hot bank and
// sub-bank selects, while the row field indexes inside the selected block.
// Purely combinational. The field widths follow the grid parameters
// (6 + 8 + 7 bits in the published full-size organisation).
module mem_addr_decoder #(
  parameter int N_BU = 64,
  parameter int N_AU = 256,
  parameter int ROWS = 128,
  localparam int RA_W = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int AU_W = (N_AU > 1) ? $clog2(N_AU) : 1,
  localparam int BU_W = (N_BU > 1) ? $clog2(N_BU) : 1,
  localparam int A_W  = BU_W + AU_W + RA_W
) (
  input  logic [A_W-1:0]  addr,
  input  logic            en,
  output logic [N_BU-1:0] bu_sel,
  output logic [N_AU-1:0] au_sel,
  output logic [RA_W-1:0] row
);
  logic [BU_W-1:0] bu;
  logic [AU_W-1:0] au;

  assign bu  = addr[A_W-1:AU_W+RA_W];
  assign au  = addr[AU_W+RA_W-1:RA_W];
  assign row = addr[RA_W-1:0];

  always_comb begin
    bu_sel = '0;
    au_sel = '0;
    for (int b = 0; b < N_BU; b++) bu_sel[b] = en && (int'(bu) == b);
    for (int a = 0; a < N_AU; a++) au_sel[a] = en && (int'(au) == a);
  end
endmodule
