// tb_latch_counter: for several latch times, checks that `latch` is high in
// exactly one cycle, the latch_time-th cycle after `start`, and that a
// restart in the middle of a count starts the timing over.
module tb_latch_counter;
  logic clk = 0, rst_n = 0;
  logic start, latch, busy;
  logic [15:0] latch_time, count;
  int checks = 0, failures = 0;

  latch_counter #(.T_W(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lts [6] = '{1, 2, 5, 17, 40, 3};
    start = 0; latch_time = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (lts[n]) begin
      int seen;
      @(negedge clk); start = 1; latch_time = 16'(lts[n]);
      @(negedge clk); start = 0;
      if (n == 5) begin        // restart after one cycle
        start = 1; @(negedge clk); start = 0;
      end
      seen = 0;
      for (int c = 1; c <= lts[n] + 5; c++) begin
        checks++;
        if (latch !== (c == lts[n])) begin
          failures++;
          $display("lt=%0d cycle %0d latch=%0d", lts[n], c, latch);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
