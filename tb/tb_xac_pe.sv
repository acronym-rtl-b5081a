// tb_xac_pe: checks the XAC processing element against the arithmetic it
// replaces: with weight bit 0 (+1) psum_o = psum_i + q, with weight bit 1
// (-1) psum_o = psum_i - q (16-bit wrap), and q_o is q delayed one cycle.
// Random operands, including the most negative value. One result per clock.
module tb_xac_pe;
  logic clk = 0, rst_n = 0;
  logic w_load, w_in;
  logic [15:0] q_i, psum_i, q_o, psum_o;
  int checks = 0, failures = 0;

  xac_pe #(.DATA_W(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_load = 0; w_in = 0; q_i = 0; psum_i = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      logic h;
      logic [15:0] q, p, expect_sum;
      h = n[3];                       // flip the weight every 8 operations
      q = (n % 37 == 0) ? 16'h8000 : 16'($urandom);
      p = 16'($urandom);
      @(negedge clk);
      w_load = (n % 8 == 0); w_in = h;
      if (n % 8 == 0) begin
        @(negedge clk);
        w_load = 0;
      end
      q_i = q; psum_i = p;
      @(posedge clk); #1;
      expect_sum = h ? (p - q) : (p + q);
      checks++;
      if (psum_o !== expect_sum || q_o !== q) begin
        failures++;
        if (failures < 10) $display("mismatch h=%0d q=%h p=%h got %h exp %h", h, q, p, psum_o, expect_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
