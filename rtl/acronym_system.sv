// acronym_system: the scale-out configuration - N_MOD search modules
// (acronym_top) behind one global controller and global merge.
//
// Each module stores up to N_BU*N_AU*ROWS items (2,097,152 at the default
// size) and runs the complete two-stage search on its own part of the
// database. The host talks to the system through one command port: queries,
// projection weights and latch times are broadcast to every module (so all
// modules use the same latch thresholds), insertion and deletion commands
// go to the module given by cmd_mod. Results come back as one stream of
// {module, BU, AU, row} addresses per query, closed by a single end-of-query
// word once every module has finished that query.
//
// The published scale-out figure draws 12 modules (3 x 4, M[0,0] to
// M[2,3]) as an example. The default here is 2 modules: one full-size module
// already takes about 2.9 GB and 1.5 minutes to elaborate in verilator, two
// take more than twice that, so 12 would not fit a 32 GB machine. N_MOD can
// be raised to what a dataset needs (48 modules for 100M items). Every
// module carries its own query buffer and encoder, so the broadcast query is
// encoded once in each module; this costs area but keeps each module
// identical to the single-module design.
//
// Ports: command port as acronym_top plus cmd_mod; merged result port with
// the module number in the top address bits; per-module insertion
// acknowledgements (ins_ack_*[m], addresses inside module m), drops and
// query counters; busy is the OR of the modules' busy flags.
module acronym_system
  import acronym_pkg::*;
#(
  parameter int N_MOD      = 2,
  parameter int N_BU       = 64,
  parameter int N_AU       = 256,
  parameter int ROWS       = 128,
  parameter int COARSE_W   = 128,
  parameter int REFINE_W   = 128,
  parameter int DIM        = 128,
  parameter int DATA_W     = 16,
  parameter int ENC_ROWS   = 64,
  parameter int ENC_COLS   = 64,
  parameter int ENC_BATCH  = 32,
  parameter int N_RAU      = 64,
  parameter int QB_DEPTH   = 64,
  parameter int CF_DEPTH   = 16,
  parameter int AF_DEPTH   = 32,
  parameter int IB_DEPTH   = 64,
  parameter int READ_II    = 2,
  parameter int READ_LAT   = 4,
  parameter int UPD_BATCH  = 8,
  parameter int WR_LAT     = 8,
  parameter int T_W        = 16,
  parameter int COARSE_LT0 = 40,
  parameter int REFINE_LT0 = 40,
  localparam int M_W    = (N_MOD > 1) ? $clog2(N_MOD) : 1,
  localparam int RA_W   = $clog2(ROWS),
  localparam int AU_W   = (N_AU > 1) ? $clog2(N_AU) : 1,
  localparam int BU_W   = (N_BU > 1) ? $clog2(N_BU) : 1,
  localparam int A_W    = BU_W + AU_W + RA_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cmd_valid,
  output logic                       cmd_ready,
  input  bus_cmd_t                   cmd,
  input  logic [M_W-1:0]             cmd_mod,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic                       out_eoq,
  output logic [M_W+A_W-1:0]         out_addr,
  output logic [N_MOD-1:0]           ins_ack_valid,
  output logic [N_MOD-1:0][A_W-1:0]  ins_ack_addr,
  output logic [N_MOD-1:0]           ins_drop,
  output logic [N_MOD-1:0][31:0]     queries_done,
  output logic                       busy
);
  logic [N_MOD-1:0]          m_cmd_valid, m_cmd_ready, m_busy;
  bus_cmd_t                  m_cmd;
  logic [N_MOD-1:0]          r_valid, r_ready, r_eoq;
  logic [N_MOD-1:0][A_W-1:0] r_addr;

  global_merge #(.N_MOD(N_MOD), .A_W(A_W)) u_global (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd, .cmd_mod,
    .m_cmd_valid, .m_cmd_ready, .m_cmd,
    .r_valid, .r_ready, .r_eoq, .r_addr,
    .out_valid, .out_ready, .out_eoq, .out_addr
  );

  for (genvar m = 0; m < N_MOD; m++) begin : g_mod
    acronym_top #(
      .N_BU(N_BU), .N_AU(N_AU), .ROWS(ROWS), .COARSE_W(COARSE_W), .REFINE_W(REFINE_W),
      .DIM(DIM), .DATA_W(DATA_W), .ENC_ROWS(ENC_ROWS), .ENC_COLS(ENC_COLS),
      .ENC_BATCH(ENC_BATCH), .N_RAU(N_RAU), .QB_DEPTH(QB_DEPTH), .CF_DEPTH(CF_DEPTH),
      .AF_DEPTH(AF_DEPTH), .IB_DEPTH(IB_DEPTH), .READ_II(READ_II), .READ_LAT(READ_LAT),
      .UPD_BATCH(UPD_BATCH), .WR_LAT(WR_LAT), .T_W(T_W), .COARSE_LT0(COARSE_LT0),
      .REFINE_LT0(REFINE_LT0)
    ) u_mod (
      .clk, .rst_n,
      .cmd_valid    (m_cmd_valid[m]),
      .cmd_ready    (m_cmd_ready[m]),
      .cmd          (m_cmd),
      .out_valid    (r_valid[m]),
      .out_ready    (r_ready[m]),
      .out_eoq      (r_eoq[m]),
      .out_addr     (r_addr[m]),
      .ins_ack_valid(ins_ack_valid[m]),
      .ins_ack_addr (ins_ack_addr[m]),
      .ins_drop     (ins_drop[m]),
      .queries_done (queries_done[m]),
      .busy         (m_busy[m])
    );
  end

  assign busy = |m_busy;
endmodule
