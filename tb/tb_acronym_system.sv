// tb_acronym_system: end-to-end test of the scale-out system at reduced
// size: two modules of 2 BUs x 2 AUs x 16 rows (64 items each), 16 + 16
// code bits, 6-dimension queries on a 4 x 4 encoder array, refinement CAM
// of 32 rows per module, behind the global controller and merge.
//
// The test keeps its own model of the database: the projection matrix, the
// code of every stored item and its system address {module, BU, AU, row}
// (taken from the per-module insertion acknowledgements). For each query it
// computes the binary code (sign of the +/-1 projection), the coarse pool of
// every module (items with coarse Hamming distance below the coarse latch
// time) and the final result (pool items with refinement distance below the
// refinement latch time), and compares it with the merged addresses
// returned before the end-of-query word.
// Phases: weight loading (broadcast); 80 insertions, two thirds of them
// into module 0; 4 deletions; 6 queries in a row (exact check); a query with a
// large coarse latch time whose pool overflows the refinement CAMs (result
// must be a subset), sixteen times in a row; queries with insertions issued while the encoders
// finish, so that searches run while an AU is locked (subset check); one
// more exact query; filling module 0 until an insertion is dropped.
// Each mechanism is counted and a failure is counted for any that never
// happened: encoder batches of several queries, address-FIFO back-pressure,
// memory read back-pressure, refinement overflow, search latched while an
// AU is locked, batched insertion, deletion, dropped insertion, broadcast
// held by a busy module, end-of-query word held for a slower module.
module tb_acronym_system;
  import acronym_pkg::*;
  localparam int N_BU = 2, N_AU = 2, ROWS = 16, CW = 16, RW = 16, DIM = 6;
  localparam int ER = 4, EC = 4, CODE_W = CW + RW, DT = 2, CT = 8, A_W = 6, NM = 2, NI = NM * 64;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, out_valid, out_ready, out_eoq, busy;
  bus_cmd_t cmd;
  logic [A_W:0] out_addr;
  logic cmd_mod;
  logic [NM-1:0] ins_ack_valid_m, ins_drop_m;
  logic [NM-1:0][A_W-1:0] ins_ack_addr;
  logic [NM-1:0][31:0] queries_done;
  int checks = 0, failures = 0;

  acronym_system #(.N_MOD(NM), .N_BU(N_BU), .N_AU(N_AU), .ROWS(ROWS), .COARSE_W(CW), .REFINE_W(RW), .DIM(DIM),
                .ENC_ROWS(ER), .ENC_COLS(EC), .ENC_BATCH(4), .N_RAU(2), .QB_DEPTH(4), .CF_DEPTH(4),
                .AF_DEPTH(4), .IB_DEPTH(8), .READ_II(3), .READ_LAT(4), .UPD_BATCH(2), .WR_LAT(4),
                .COARSE_LT0(7), .REFINE_LT0(8)) dut (.*, .ins_ack_valid(ins_ack_valid_m), .ins_drop(ins_drop_m));
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- model ----------------------------------------------------------------
  bit H [CODE_W][DIM];
  logic [CODE_W-1:0] item_code [NI];     // by address
  bit                item_valid [NI];
  logic [CODE_W-1:0] pending_codes [NM][$];  // inserted, not yet acknowledged
  int lc = 7, lr = 8;

  // mechanism counters
  int m_batch = 0, m_afifo_bp = 0, m_mem_bp = 0, m_ovf = 0, m_lock_search = 0;
  int m_ins_batch = 0, m_delete = 0, m_drop = 0, m_bcast = 0, m_eoq_wait = 0;

  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < NM; m++) begin
      if (ins_ack_valid_m[m]) begin
        item_code[{m[0], ins_ack_addr[m]}] = pending_codes[m].pop_front();
        item_valid[{m[0], ins_ack_addr[m]}] = 1;
      end
      if (ins_drop_m[m]) begin m_drop++; void'(pending_codes[m].pop_front()); end
    end
    if (int'(dut.g_mod[0].u_mod.u_enc.state) == 1 && dut.g_mod[0].u_mod.u_enc.ld_row == 0 &&
        dut.g_mod[0].u_mod.u_enc.ct == 0 && dut.g_mod[0].u_mod.u_enc.dt == 0 &&
        dut.g_mod[0].u_mod.u_enc.n_q > 1) m_batch++;
    if (dut.g_mod[0].u_mod.cc_valid && !dut.g_mod[0].u_mod.cc_ready) m_afifo_bp++;
    if (dut.g_mod[1].u_mod.cc_valid && !dut.g_mod[1].u_mod.cc_ready) m_afifo_bp++;
    if (dut.g_mod[0].u_mod.af_valid && !dut.g_mod[0].u_mod.af_ready) m_mem_bp++;
    if (dut.g_mod[1].u_mod.af_valid && !dut.g_mod[1].u_mod.af_ready) m_mem_bp++;
    if (dut.g_mod[0].u_mod.rc_ovf || dut.g_mod[1].u_mod.rc_ovf) m_ovf++;
    if (dut.g_mod[0].u_mod.u_coarse.latch && dut.g_mod[0].u_mod.lock_en) m_lock_search++;
    if (dut.g_mod[1].u_mod.u_coarse.latch && dut.g_mod[1].u_mod.lock_en) m_lock_search++;
    if (dut.g_mod[0].u_mod.u_uctrl.do_write && int'(dut.g_mod[0].u_mod.u_uctrl.n_batch) == 1) m_ins_batch++;
    if (dut.g_mod[1].u_mod.u_uctrl.do_write && int'(dut.g_mod[1].u_mod.u_uctrl.n_batch) == 1) m_ins_batch++;
    if (cmd_valid && !cmd_ready && dut.u_global.taken != '0) m_bcast++;
    if (^(dut.r_valid & dut.r_eoq)) m_eoq_wait++;
  end

  function automatic logic [CODE_W-1:0] encode(input logic [DIM-1:0][15:0] q);
    logic [CODE_W-1:0] c;
    for (int k = 0; k < CODE_W; k++) begin
      int s;
      s = 0;
      for (int i = 0; i < DIM; i++) s += H[k][i] ? -int'($signed(q[i])) : int'($signed(q[i]));
      c[k] = (s >= 0);
    end
    return c;
  endfunction

  // expected result set for a query code, as a bit per address
  function automatic void expected(input logic [CODE_W-1:0] qc, output bit res [NI], output int npool);
    npool = 0;
    for (int a = 0; a < NI; a++) begin
      bit in_pool;
      in_pool = item_valid[a] && $countones(item_code[a][CW-1:0] ^ qc[CW-1:0]) < lc;
      if (in_pool) npool++;
      res[a] = in_pool && $countones(item_code[a][CODE_W-1:CW] ^ qc[CODE_W-1:CW]) < lr;
    end
  endfunction

  // ---- bus -----------------------------------------------------------------
  task automatic send(input bus_op_e op, input int addr, input logic [63:0] data);
    @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.addr = 24'(addr); cmd.data = data;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cmd_valid = 0; cmd.op = OP_NOP;
  endtask

  task automatic insert_item(input int m);
    logic [CODE_W-1:0] c;
    c = CODE_W'($urandom);
    pending_codes[m].push_back(c);
    cmd_mod = m[0];
    send(OP_CODE, 0, 64'(c));
    send(OP_INSERT, 0, 0);
  endtask
  function automatic int n_pending();
    return pending_codes[0].size() + pending_codes[1].size();
  endfunction

  logic [CODE_W-1:0] qcodes [$];
  bit                exact [$];

  task automatic send_query(input bit exact_check);
    logic [DIM-1:0][15:0] q;
    for (int i = 0; i < DIM; i++) q[i] = 16'($signed($urandom % 2001) - 1000);
    qcodes.push_back(encode(q));
    exact.push_back(exact_check);
    for (int i = 0; i < DIM; i++) send(OP_QUERY, 0, 64'(q[i]));
  endtask

  // ---- result checker ----------------------------------------------------------
  int results_seen = 0, nonempty = 0;
  bit got [NI];
  initial foreach (got[a]) got[a] = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (!out_eoq) begin
      if (got[out_addr]) begin
        checks++; failures++;
        $display("query %0d: address %0d returned twice", results_seen, out_addr);
      end
      got[out_addr] = 1;
    end else begin
      bit res [NI];
      int npool, nres;
      logic [CODE_W-1:0] qc;
      bit ex;
      qc = qcodes.pop_front();
      ex = exact.pop_front();
      expected(qc, res, npool);
      nres = 0;
      checks++;
      for (int a = 0; a < NI; a++) begin
        if (got[a]) nres++;
        if ((ex && got[a] != res[a]) || (!ex && got[a] && !item_valid[a])) begin
          failures++;
          $display("query %0d: address %0d returned %0d, expected %0d", results_seen, a, got[a], res[a]);
          break;
        end
      end
      if (!ex) begin
        // subset check: every returned item is close enough in both halves
        for (int a = 0; a < NI; a++)
          if (got[a] && ($countones(item_code[a][CW-1:0] ^ qc[CW-1:0]) >= lc ||
                         $countones(item_code[a][CODE_W-1:CW] ^ qc[CODE_W-1:CW]) >= lr)) begin
            failures++;
            $display("query %0d: address %0d is not a valid result", results_seen, a);
            break;
          end
      end
      if (nres > 0) nonempty++;
      foreach (got[a]) got[a] = 0;
      results_seen++;
    end
  end

  always @(negedge clk) out_ready = ($urandom % 5) != 0;

  task automatic wait_results();
    while (qcodes.size() != 0) @(negedge clk);
    repeat (3) @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  initial begin
    cmd_valid = 0; cmd = '0; cmd_mod = 0;
    foreach (item_valid[a]) item_valid[a] = 0;
    for (int k = 0; k < CODE_W; k++) for (int i = 0; i < DIM; i++) H[k][i] = 1'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights: word ((ct*DT)+dt)*ER + r, bit j -> code bit ct*EC+j, dimension dt*ER+r
    for (int ct = 0; ct < CT; ct++) for (int dt = 0; dt < DT; dt++) for (int r = 0; r < ER; r++) begin
      logic [63:0] w;
      w = '0;
      for (int j = 0; j < EC; j++) w[j] = (dt * ER + r < DIM) ? H[ct * EC + j][dt * ER + r] : 1'b0;
      send(OP_WEIGHT, ((ct * DT) + dt) * ER + r, w);
    end
    send(OP_LATCH, 0, 64'((lr << 16) | lc));
    // 40 insertions
    for (int n = 0; n < 80; n++) insert_item(($urandom % 3 == 0) ? 1 : 0);
    wait_results();
    checks++;
    if (n_pending() != 0) begin failures++; $display("%0d insertions not acknowledged", n_pending()); end
    // 4 deletions
    for (int n = 0; n < 4; n++) begin
      int a;
      do a = $urandom % NI; while (!item_valid[a]);
      cmd_mod = a[A_W];
      send(OP_DELETE, a % 64, 0);
      item_valid[a] = 0;
      m_delete++;
    end
    wait_results();
    // 6 queries back to back, exact check
    for (int n = 0; n < 6; n++) send_query(1);
    wait_results();
    // large pool: refinement CAM overflows
    // (module 0 holds about twice as many items: its searches take longer,
    // its query path backs up and broadcasts have to wait for it)
    lc = 15;
    send(OP_LATCH, 0, 64'((lr << 16) | lc));
    for (int n = 0; n < 16; n++) send_query(0);
    wait_results();
    lc = 8;
    send(OP_LATCH, 0, 64'((lr << 16) | lc));
    // queries interleaved with insertions
    // (insertions are issued while the encoder works on its last code tile,
    // so the write lock overlaps the coarse search of the query)
    for (int n = 0; n < 6; n++) begin
      send_query(0);
      wait (int'(dut.g_mod[0].u_mod.u_enc.state) == 2 && int'(dut.g_mod[0].u_mod.u_enc.ct) == CT - 1);
      for (int k = 0; k < 6; k++) insert_item(0);
      wait_results();
    end
    wait_results();
    // one more exact query on the settled database
    send_query(1);
    wait_results();
    // fill the module until an insertion is dropped
    while (m_drop == 0 && n_pending() < 100) begin
      insert_item(0);
      if (n_pending() > 4) wait_results();
    end
    wait_results();

    checks++;
    if (results_seen != 29) begin failures++; $display("%0d results for 29 queries", results_seen); end
    checks++;
    if (queries_done[0] != 29 || queries_done[1] != 29) begin failures++; $display("queries_done %0d %0d", queries_done[0], queries_done[1]); end
    checks++; if (m_bcast == 0)       begin failures++; $display("never: broadcast held by a busy module"); end
    checks++; if (m_eoq_wait == 0)    begin failures++; $display("never: end-of-query held for a slower module"); end
    $display("broadcast holds %0d, end-of-query waits %0d", m_bcast, m_eoq_wait);
    $display("mechanisms: encoder batches %0d, addr-FIFO back-pressure %0d, memory back-pressure %0d, refine overflow %0d, search under lock %0d, batched inserts %0d, deletions %0d, drops %0d, non-empty results %0d",
             m_batch, m_afifo_bp, m_mem_bp, m_ovf, m_lock_search, m_ins_batch, m_delete, m_drop, nonempty);
    checks++; if (m_batch == 0)       begin failures++; $display("never: multi-query encoder batch"); end
    checks++; if (m_afifo_bp == 0)    begin failures++; $display("never: address FIFO back-pressure"); end
    checks++; if (m_mem_bp == 0)      begin failures++; $display("never: memory read back-pressure"); end
    checks++; if (m_ovf == 0)         begin failures++; $display("never: refinement overflow"); end
    checks++; if (m_lock_search == 0) begin failures++; $display("never: search during AU lock"); end
    checks++; if (m_ins_batch == 0)   begin failures++; $display("never: batched insertion"); end
    checks++; if (m_delete == 0)      begin failures++; $display("never: deletion"); end
    checks++; if (m_drop == 0)        begin failures++; $display("never: dropped insertion"); end
    checks++; if (nonempty == 0)      begin failures++; $display("never: non-empty result"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
