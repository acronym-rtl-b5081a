// refine_mem: refinement code memory of one ACRONYM module.
//
// Holds the refinement part (REFINE_W bits) of every item's code at the
// same {BU, AU, row} address as its coarse part in the coarse CAM, so that
// a coarse candidate's address is directly its memory address. The memory
// is organised as N_BU banks of N_AU blocks of ROWS words; mem_addr_decoder
// turns an address into one-hot bank and block selects plus a row index.
//
// The published system places these codes in an external high-bandwidth
// memory that is slow next to the CAM; here the memory is an on-chip array
// with a deliberately slow read port: a read request is accepted at most
// once every READ_II cycles (rd_ready is low in between, which is what
// back-pressures the address FIFO in front of it) and its data return
// READ_LAT cycles after acceptance on rsp_valid together with the address.
// Both numbers are this design's stand-ins. The response port has no ready:
// the consumer must accept a response in the cycle it is valid.
//
// Write port: we/waddr/wdata, one word per cycle, used for loading and for
// dynamic insertion.
module refine_mem #(
  parameter int N_BU     = 64,
  parameter int N_AU     = 256,
  parameter int ROWS     = 128,
  parameter int REFINE_W = 128,
  parameter int READ_II  = 2,
  parameter int READ_LAT = 4,
  localparam int RA_W = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int AU_W = (N_AU > 1) ? $clog2(N_AU) : 1,
  localparam int BU_W = (N_BU > 1) ? $clog2(N_BU) : 1,
  localparam int A_W  = BU_W + AU_W + RA_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                we,
  input  logic [A_W-1:0]      waddr,
  input  logic [REFINE_W-1:0] wdata,
  input  logic                rd_valid,
  output logic                rd_ready,
  input  logic [A_W-1:0]      rd_addr,
  output logic                rsp_valid,
  output logic [A_W-1:0]      rsp_addr,
  output logic [REFINE_W-1:0] rsp_data
);
  localparam int BW = N_AU * ROWS;    // words per bank
  localparam int II_W = $clog2(READ_II + 1);

  logic [N_BU-1:0]     w_bsel, r_bsel;
  logic [N_AU-1:0]     w_asel, r_asel;
  logic [RA_W-1:0]     w_row, r_row;
  logic [II_W-1:0]     gap;
  logic                rd_fire;

  mem_addr_decoder #(.N_BU(N_BU), .N_AU(N_AU), .ROWS(ROWS)) u_wdec (
    .addr(waddr), .en(we), .bu_sel(w_bsel), .au_sel(w_asel), .row(w_row));
  mem_addr_decoder #(.N_BU(N_BU), .N_AU(N_AU), .ROWS(ROWS)) u_rdec (
    .addr(rd_addr), .en(rd_fire), .bu_sel(r_bsel), .au_sel(r_asel), .row(r_row));

  function automatic int onehot_idx(input logic [N_AU-1:0] v, input int n);
    int r;
    r = 0;
    for (int i = 0; i < n; i++) if (v[i]) r = i;
    return r;
  endfunction

  // banks: word index inside a bank = AU block * ROWS + row
  logic [N_BU-1:0][REFINE_W-1:0] bank_q;
  for (genvar b = 0; b < N_BU; b++) begin : g_bank
    logic [REFINE_W-1:0] mem [BW];
    always_ff @(posedge clk) begin
      if (w_bsel[b])
        mem[onehot_idx(w_asel, N_AU) * ROWS + int'(w_row)] <= wdata;
      if (r_bsel[b])
        bank_q[b] <= mem[onehot_idx(r_asel, N_AU) * ROWS + int'(r_row)];
    end
  end

  // read pipeline: accept, then READ_LAT-1 further register stages
  logic [READ_LAT-1:0]           pv;
  logic [READ_LAT-1:0][A_W-1:0]  pa;
  logic [READ_LAT-1:0][BU_W-1:0] pb;

  assign rd_ready = (gap == '0);
  assign rd_fire  = rd_valid && rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gap <= '0;
      pv  <= '0;
      pa  <= '0;
      pb  <= '0;
    end else begin
      if (rd_fire)          gap <= II_W'(READ_II - 1);
      else if (gap != '0)   gap <= gap - 1'b1;
      pv[0] <= rd_fire;
      pa[0] <= rd_addr;
      pb[0] <= rd_addr[A_W-1:AU_W+RA_W];
      for (int s = 1; s < READ_LAT; s++) begin
        pv[s] <= pv[s-1];
        pa[s] <= pa[s-1];
        pb[s] <= pb[s-1];
      end
    end
  end

  // data pipeline: stage 0 is the bank's read register, selected by bank
  logic [READ_LAT-1:0][REFINE_W-1:0] pd;
  always_comb pd[0] = bank_q[pb[0]];
  for (genvar s = 1; s < READ_LAT; s++) begin : g_dpipe
    always_ff @(posedge clk) pd[s] <= pd[s-1];
  end

  assign rsp_valid = pv[READ_LAT-1];
  assign rsp_addr  = pa[READ_LAT-1];
  assign rsp_data  = pd[READ_LAT-1];
endmodule
