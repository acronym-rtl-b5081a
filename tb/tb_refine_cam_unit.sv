// tb_refine_cam_unit: refinement CAM of 2 AUs x 8 rows x 16 bits (capacity
// 16). Per round: clear, write a random number of candidates (item address
// + code; one round writes more than the capacity and must flag overflow
// for each dropped one), search with a latch time, and check that the
// emitted item addresses are exactly the written candidates with Hamming
// distance < latch time, each once, and that `done` pulses once at the end.
// Candidates left from an earlier round must never appear.
module tb_refine_cam_unit;
  localparam int N_RAU = 2, ROWS = 8, RW = 16, A_W = 12, CAP = N_RAU * ROWS;
  logic clk = 0, rst_n = 0;
  logic clear, cand_valid, search_start, out_valid, out_ready, done, overflow, busy;
  logic [A_W-1:0] cand_addr, out_addr;
  logic [RW-1:0] cand_code, q_code;
  logic [15:0] latch_time;
  logic [4:0] n_written;
  int checks = 0, failures = 0;

  refine_cam_unit #(.N_RAU(N_RAU), .ROWS(ROWS), .REFINE_W(RW), .A_W(A_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {clear, cand_valid, search_start, out_ready, cand_addr, cand_code, q_code, latch_time} = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 8; n++) begin
      int nc, nw, novf, lt, nexp, ngot, ndone;
      logic [A_W-1:0] addrs [$];
      logic [RW-1:0]  codes [$];
      logic [RW-1:0]  q;
      bit seen [int];
      addrs.delete(); codes.delete(); seen.delete();
      nc = (n == 3) ? CAP + 5 : 1 + $urandom % CAP;
      q = RW'($urandom); lt = 6 + n % 3;
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      novf = 0;
      for (int k = 0; k < nc; k++) begin
        logic [A_W-1:0] a;
        logic [RW-1:0] c;
        a = A_W'(n * 256 + k); c = RW'($urandom);
        if (k < CAP) begin addrs.push_back(a); codes.push_back(c); end
        cand_valid = 1; cand_addr = a; cand_code = c;
        #1 if (overflow) novf++;
        @(negedge clk);
      end
      cand_valid = 0;
      checks++;
      if (novf != nc - addrs.size() || int'(n_written) != addrs.size()) begin
        failures++;
        $display("round %0d: overflow %0d written %0d", n, novf, n_written);
      end
      nexp = 0;
      foreach (codes[i]) if ($countones(codes[i] ^ q) < lt) nexp++;
      search_start = 1; q_code = q; latch_time = 16'(lt);
      @(negedge clk); search_start = 0;
      ngot = 0; ndone = 0;
      for (int c = 0; c < lt + CAP + 8; c++) begin
        out_ready = ($urandom % 3) != 0;
        #1;
        if (out_valid && out_ready) begin
          int i;
          i = -1;
          foreach (addrs[j]) if (addrs[j] == out_addr) i = j;
          checks++;
          if (i < 0 || seen.exists(i) || $countones(codes[i] ^ q) >= lt) begin
            failures++;
            $display("round %0d: unexpected address %h", n, out_addr);
          end
          seen[i] = 1;
          ngot++;
        end
        if (done) ndone++;
        @(negedge clk);
      end
      checks++;
      if (ngot != nexp || ndone != 1) begin
        failures++;
        $display("round %0d: got %0d of %0d, done %0d", n, ngot, nexp, ndone);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
