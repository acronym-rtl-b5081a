// tb_sparse_encoder: loads random multi-hot vectors (including all-zero and
// all-one) into a 128-bit sparse encoder and checks that exactly the set
// positions come out, lowest first, one per accepted handshake, with random
// stalls on out_ready, and that `pending` falls after the last one.
module tb_sparse_encoder;
  localparam int W = 128;
  logic clk = 0, rst_n = 0;
  logic load, out_valid, out_ready, pending;
  logic [W-1:0] vec;
  logic [6:0] out_idx;
  int checks = 0, failures = 0;

  sparse_encoder #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; vec = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      logic [W-1:0] v;
      int expect_i;
      for (int i = 0; i < W; i += 32) v[i +: 32] = $urandom & $urandom;
      if (n == 0) v = '0;
      if (n == 1) v = '1;
      @(negedge clk); load = 1; vec = v;
      @(negedge clk); load = 0;
      expect_i = 0;
      while (1) begin
        while (expect_i < W && !v[expect_i]) expect_i++;
        if (expect_i == W) break;
        out_ready = ($urandom % 3) != 0;
        #1;
        checks++;
        if (!out_valid || out_idx != 7'(expect_i)) begin
          failures++;
          $display("vector %0d: valid %0d idx %0d, expected %0d", n, out_valid, out_idx, expect_i);
          break;
        end
        if (out_ready) expect_i++;
        @(negedge clk);
      end
      out_ready = 1;
      #1;
      checks++;
      if (out_valid || pending) begin failures++; $display("vector %0d: left-over bits", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
