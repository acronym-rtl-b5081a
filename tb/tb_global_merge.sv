// tb_global_merge: unit test of the global controller / global merge.
//
// Three modules are modelled by the testbench. Each accepts commands with a
// random ready signal and records what it received; each has a queue of
// result words per query (a random number of addresses, then an
// end-of-query word) and offers them with random gaps.
// Checked: every broadcast command (weight, query, latch) reaches every
// module exactly once and in order, routed commands (code, insert, delete)
// reach only the module named by cmd_mod, and the merged stream carries, for
// each query in turn, exactly the addresses of all modules (tagged with the
// module number, each module's order kept) followed by one end-of-query
// word. Counted mechanisms: broadcast held by a slow module, end-of-query
// word held while another module still sends.
module tb_global_merge;
  import acronym_pkg::*;
  localparam int N = 3, A_W = 5, M_W = 2, NQ = 40, NCMD = 300;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, out_valid, out_ready, out_eoq;
  bus_cmd_t cmd, m_cmd;
  logic [M_W-1:0] cmd_mod;
  logic [N-1:0] m_cmd_valid, m_cmd_ready, r_valid, r_ready, r_eoq;
  logic [N-1:0][A_W-1:0] r_addr;
  logic [M_W+A_W-1:0] out_addr;
  int checks = 0, failures = 0;

  global_merge #(.N_MOD(N), .A_W(A_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- commands ---------------------------------------------------------------
  bus_cmd_t exp_cmd [N][$];
  int m_bcast_stall = 0, m_eoq_wait = 0;

  always @(negedge clk) m_cmd_ready = N'($urandom);

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) if (m_cmd_valid[i] && m_cmd_ready[i]) begin
      bus_cmd_t e;
      checks++;
      if (exp_cmd[i].size() == 0) begin
        failures++; $display("module %0d: unexpected command", i);
      end else begin
        e = exp_cmd[i].pop_front();
        if (e != m_cmd) begin failures++; $display("module %0d: command %p, expected %p", i, m_cmd, e); end
      end
    end
    if (cmd_valid && !cmd_ready && dut.taken != '0) m_bcast_stall++;
  end

  // ---- results ------------------------------------------------------------------
  logic [A_W:0] rq [N][$];   // {eoq, addr}
  logic [M_W+A_W-1:0] exp_set [NQ][$];
  int q_out = 0, n_addr = 0;
  logic [M_W+A_W-1:0] got [$];

  always @(negedge clk) begin
    for (int i = 0; i < N; i++) begin
      r_valid[i] = rq[i].size() != 0 && ($urandom % 4 != 0);
      r_eoq[i]   = r_valid[i] ? rq[i][0][A_W] : 1'b0;
      r_addr[i]  = r_valid[i] ? rq[i][0][A_W-1:0] : '0;
    end
    out_ready = ($urandom % 4) != 0;
  end

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) if (r_valid[i] && r_ready[i]) void'(rq[i].pop_front());
    if (|(r_valid & r_eoq) && !(&(r_valid & r_eoq))) m_eoq_wait++;
    if (out_valid && out_ready) begin
      if (!out_eoq) begin
        got.push_back(out_addr);
        n_addr++;
      end else begin
        checks++;
        if (q_out >= NQ || got.size() != exp_set[q_out].size()) begin
          failures++;
          $display("query %0d: %0d addresses, expected %0d", q_out, got.size(), q_out < NQ ? exp_set[q_out].size() : -1);
        end else begin
          // per-module order kept, same multiset
          for (int m = 0; m < N; m++) begin
            logic [M_W+A_W-1:0] g [$], e [$];
            g = got.find(x) with (x[M_W+A_W-1:A_W] == m);
            e = exp_set[q_out].find(x) with (x[M_W+A_W-1:A_W] == m);
            if (g != e) begin failures++; $display("query %0d module %0d: order or content differs", q_out, m); break; end
          end
        end
        got.delete();
        q_out++;
      end
    end
  end

  initial begin
    cmd_valid = 0; cmd = '0; cmd_mod = '0;
    foreach (r_valid[i]) begin r_valid[i] = 0; r_eoq[i] = 0; r_addr[i] = '0; end
    // per-query results
    for (int q = 0; q < NQ; q++)
      for (int m = 0; m < N; m++) begin
        int n;
        n = $urandom % 5;
        for (int k = 0; k < n; k++) begin
          logic [A_W-1:0] a;
          a = A_W'($urandom);
          rq[m].push_back({1'b0, a});
          exp_set[q].push_back({M_W'(m), a});
        end
        rq[m].push_back({1'b1, A_W'(0)});
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NCMD; c++) begin
      bus_cmd_t k;
      bus_op_e ops [6] = '{OP_WEIGHT, OP_QUERY, OP_LATCH, OP_CODE, OP_INSERT, OP_DELETE};
      k.op = ops[$urandom % 6];
      k.addr = 24'($urandom);
      k.data = {$urandom, $urandom};
      @(negedge clk);
      cmd_valid = 1; cmd = k; cmd_mod = M_W'($urandom % (N + 1));
      if (k.op inside {OP_WEIGHT, OP_QUERY, OP_LATCH})
        for (int i = 0; i < N; i++) exp_cmd[i].push_back(k);
      else if (int'(cmd_mod) < N) exp_cmd[cmd_mod].push_back(k);
      #1;
      while (!cmd_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      cmd_valid = 0;
    end
    while (q_out < NQ) @(negedge clk);
    repeat (5) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (exp_cmd[i].size() != 0) begin failures++; $display("module %0d: %0d commands missing", i, exp_cmd[i].size()); end
    end
    checks++;
    if (out_valid) begin failures++; $display("extra output after the last query"); end
    $display("merged %0d addresses in %0d queries; broadcast stalls %0d, end-of-query waits %0d", n_addr, q_out, m_bcast_stall, m_eoq_wait);
    checks++; if (m_bcast_stall == 0) begin failures++; $display("never: broadcast held by a slow module"); end
    checks++; if (m_eoq_wait == 0)    begin failures++; $display("never: end-of-query held"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
