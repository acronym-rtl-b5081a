// tb_fifo_sync: random pushes and pops against a queue model. Checks data
// order, the occupancy count, that in_ready drops exactly when DEPTH
// entries are held (the overflow flag is seen at least once) and that
// out_valid drops when empty.
module tb_fifo_sync;
  localparam int W = 12, D = 5;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, overflow;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0, n_full = 0;
  logic [W-1:0] model [$];

  fifo_sync #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid  = ($urandom % 100) < ((n / 250) % 2 ? 30 : 75);
      out_ready = ($urandom % 100) < ((n / 250) % 2 ? 75 : 30);
      in_data   = W'($urandom);
      #1;
      checks++;
      if (int'(count) != model.size() || in_ready != (model.size() < D) ||
          out_valid != (model.size() > 0)) begin
        failures++;
        $display("status mismatch: count %0d model %0d", count, model.size());
      end
      if (out_valid) begin
        checks++;
        if (out_data !== model[0]) begin
          failures++;
          $display("data %h expected %h", out_data, model[0]);
        end
      end
      if (overflow) n_full++;
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    checks++;
    if (n_full == 0) begin
      failures++;
      $display("FIFO never filled up");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
