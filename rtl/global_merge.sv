// global_merge: global controller and global merge of the multi-module
// (scale-out) configuration.
//
// To hold more items than one module, several identical modules each store
// a part of the database. The global controller sends every query and the
// latch times to all modules at once; each module searches its own part on
// its own (no traffic between modules) and returns its local result pool.
// The global merge joins the pools into one result stream. That much is the
// published scale-out scheme; the rest is this design's own choice:
//  - Command routing. OP_WEIGHT, OP_QUERY, OP_LATCH and OP_NOP are
//    broadcast: the command is offered to every module and cmd_ready rises
//    in the cycle the last module takes it (modules that took it earlier are
//    masked, so none sees it twice). OP_CODE, OP_INSERT and OP_DELETE go to
//    the one module named by cmd_mod, so the host decides where an item is
//    stored (a cmd_mod beyond the last module is accepted and discarded).
//  - Merge. Result addresses of all modules are interleaved round robin
//    (through an addr_wrapper) and prefixed with the module number, giving
//    {module, BU, AU, row}. A module's end-of-query word is held at its
//    output until every module has reached the end of the same query; the
//    merge then takes all of them and sends one end-of-query word, after the
//    last address still in its output register. Results therefore stay in
//    query order and the host sees one end marker per query.
// Timing: a broadcast command takes at least one cycle and as many as the
// slowest module needs; result addresses leave one cycle after a module
// offers them (output register of the wrapper); the merged end-of-query word
// is combinational from the module outputs once the register is empty.
module global_merge
  import acronym_pkg::*;
#(
  parameter int N_MOD = 12,
  parameter int A_W   = 21,
  localparam int M_W  = (N_MOD > 1) ? $clog2(N_MOD) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // host side
  input  logic                      cmd_valid,
  output logic                      cmd_ready,
  input  bus_cmd_t                  cmd,
  input  logic [M_W-1:0]            cmd_mod,
  // module command ports
  output logic [N_MOD-1:0]          m_cmd_valid,
  input  logic [N_MOD-1:0]          m_cmd_ready,
  output bus_cmd_t                  m_cmd,
  // module result ports
  input  logic [N_MOD-1:0]          r_valid,
  output logic [N_MOD-1:0]          r_ready,
  input  logic [N_MOD-1:0]          r_eoq,
  input  logic [N_MOD-1:0][A_W-1:0] r_addr,
  // merged results
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic                      out_eoq,
  output logic [M_W+A_W-1:0]        out_addr
);
  // ---- global controller: broadcast or route --------------------------------
  logic             bcast, mod_ok;
  logic [N_MOD-1:0] taken, taken_now;

  assign bcast  = (cmd.op == OP_WEIGHT) || (cmd.op == OP_QUERY) ||
                  (cmd.op == OP_LATCH)  || (cmd.op == OP_NOP);
  assign mod_ok = (int'(cmd_mod) < N_MOD);
  assign m_cmd  = cmd;

  always_comb begin
    for (int i = 0; i < N_MOD; i++)
      m_cmd_valid[i] = cmd_valid && (bcast ? !taken[i] : (int'(cmd_mod) == i));
    taken_now = taken | (m_cmd_valid & m_cmd_ready);
    if (bcast)       cmd_ready = &taken_now;
    else if (mod_ok) cmd_ready = m_cmd_ready[cmd_mod];
    else             cmd_ready = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                          taken <= '0;
    else if (cmd_valid && bcast)         taken <= cmd_ready ? '0 : taken_now;
  end

  // ---- global merge -----------------------------------------------------------
  logic [N_MOD-1:0] aw_in_ready;
  logic             aw_valid, all_eoq, eoq_go;
  logic [M_W+A_W-1:0] aw_data;

  addr_wrapper #(.N(N_MOD), .PW(A_W)) u_wrap (
    .clk, .rst_n,
    .in_valid (r_valid & ~r_eoq),
    .in_ready (aw_in_ready),
    .in_data  (r_addr),
    .out_valid(aw_valid),
    .out_ready(out_ready),
    .out_data (aw_data)
  );

  assign all_eoq   = &(r_valid & r_eoq);
  assign eoq_go    = !aw_valid && all_eoq && out_ready;
  assign out_valid = aw_valid || all_eoq;
  assign out_eoq   = !aw_valid;
  assign out_addr  = aw_valid ? aw_data : '0;
  assign r_ready   = aw_in_ready | {N_MOD{eoq_go}};

  a_bcast_once: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && bcast) |-> ((taken & m_cmd_valid) == '0));
endmodule
