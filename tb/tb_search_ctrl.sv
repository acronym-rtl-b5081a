// tb_search_ctrl: drives the search controller with scripted responses from
// its neighbours and checks the sequence for each of five queries: the code
// is popped only when idle, the coarse search and the refinement clear
// start together with the coarse half of the code, the refinement search
// starts only after coarse_done and collect_idle and carries the refinement
// half, one end-of-query marker follows refine_done (held while eoq_ready is
// low), and q_count counts the queries.
module tb_search_ctrl;
  localparam int CW = 8, RW = 8;
  logic clk = 0, rst_n = 0;
  logic code_valid, code_ready, coarse_start, coarse_done, refine_clear, collect_idle;
  logic refine_start, refine_done, eoq_valid, eoq_ready, busy;
  logic [CW+RW-1:0] code;
  logic [CW-1:0] coarse_q;
  logic [RW-1:0] refine_q;
  logic [31:0] q_count;
  int checks = 0, failures = 0;

  search_ctrl #(.COARSE_W(CW), .REFINE_W(RW), .QC_W(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("query check failed: %s", what); end
  endtask

  initial begin
    {code_valid, code, coarse_done, collect_idle, refine_done, eoq_ready} = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5; n++) begin
      logic [CW+RW-1:0] c;
      c = 16'($urandom);
      @(negedge clk); code_valid = 1; code = c; #1;
      expect_true(code_ready && coarse_start && refine_clear && coarse_q == c[CW-1:0], "start");
      @(negedge clk); code_valid = 0; #1;
      expect_true(!code_ready && !coarse_start, "busy after start");
      repeat (3 + n) begin
        @(negedge clk); collect_idle = 1; #1;      // idle collection before coarse_done: no refine
        expect_true(!refine_start, "refine waits for coarse_done");
      end
      collect_idle = 0;
      coarse_done = 1; @(negedge clk); coarse_done = 0;
      repeat (n) begin #1 expect_true(!refine_start, "refine waits for collect_idle"); @(negedge clk); end
      collect_idle = 1; #1;
      expect_true(refine_start && refine_q == c[CW+RW-1:CW], "refine start");
      @(negedge clk); collect_idle = 0; #1;
      expect_true(!refine_start, "single refine start");
      repeat (2) @(negedge clk);
      refine_done = 1; @(negedge clk); refine_done = 0; #1;
      expect_true(eoq_valid, "eoq after refine_done");
      @(negedge clk); #1;
      expect_true(eoq_valid, "eoq held");
      eoq_ready = 1; @(negedge clk); eoq_ready = 0; #1;
      expect_true(!eoq_valid && q_count == 32'(n + 1) && !busy, "query counted");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
