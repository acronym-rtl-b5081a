// tb_addr_wrapper: four sources each offer a random-length list of 5-bit
// payloads with random gaps; the sink stalls at random. Checks that every
// payload arrives exactly once with the right source header, in per-source
// order, and that while several sources wait no source is served twice in
// a row (round robin).
module tb_addr_wrapper;
  localparam int N = 4, PW = 5;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready;
  logic [N-1:0][PW-1:0] in_data;
  logic out_valid, out_ready;
  logic [1+PW:0] out_data;
  int checks = 0, failures = 0;
  logic [PW-1:0] lists [N][$];
  int pos [N];
  int got [N];

  addr_wrapper #(.N(N), .PW(PW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sources
  always_comb
    for (int i = 0; i < N; i++) in_data[i] = (pos[i] < lists[i].size()) ? lists[i][pos[i]] : '0;
  always @(posedge clk)
    for (int i = 0; i < N; i++) if (in_valid[i] && in_ready[i]) pos[i]++;

  initial begin
    int total, recv, last_src, both_wait;
    in_valid = '0; out_ready = 0;
    total = 0;
    for (int i = 0; i < N; i++) begin
      int n;
      n = 5 + $urandom % 20;
      for (int k = 0; k < n; k++) lists[i].push_back(PW'($urandom));
      total += n; pos[i] = 0; got[i] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    recv = 0; last_src = -1;
    while (recv < total) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) in_valid[i] = (pos[i] < lists[i].size()) && (($urandom % 4) != 0 || in_valid[i]);
      out_ready = ($urandom % 4) != 0;
      #1;
      if (out_valid && out_ready) begin
        int s;
        s = int'(out_data[PW+1:PW]);
        checks++;
        if (got[s] >= lists[s].size() || out_data[PW-1:0] !== lists[s][got[s]]) begin
          failures++;
          $display("source %0d item %0d wrong: %h", s, got[s], out_data[PW-1:0]);
        end
        got[s]++;
        recv++;
      end
    end
    @(negedge clk); in_valid = '0;
    repeat (3) @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("extra output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // round robin: a source granted twice in a row while another waits is an error
  logic [N-1:0] prev_grant;
  always @(posedge clk) begin
    if (rst_n) begin
      logic [N-1:0] g;
      g = in_valid & in_ready;
      if (g != 0 && g == prev_grant && ($countones(in_valid) > 1)) begin
        checks++;
        failures++;
        $display("source granted twice while others wait");
      end
      if (g != 0) prev_grant <= g;
    end else prev_grant <= '0;
  end
endmodule
