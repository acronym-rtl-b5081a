// tb_refine_mem: refinement memory of 2 BUs x 4 AUs x 8 rows, 32-bit words,
// read interval 3 and read latency 5. Writes random words to every address,
// then issues random reads back to back. Checks each response's address and
// data, that a response comes exactly READ_LAT cycles after its request was
// accepted, and that requests are never accepted closer than READ_II cycles.
module tb_refine_mem;
  localparam int N_BU = 2, N_AU = 4, ROWS = 8, RW = 32, II = 3, LAT = 5, NA = N_BU * N_AU * ROWS;
  logic clk = 0, rst_n = 0;
  logic we, rd_valid, rd_ready, rsp_valid;
  logic [5:0] waddr, rd_addr, rsp_addr;
  logic [RW-1:0] wdata, rsp_data;
  int checks = 0, failures = 0, cyc = 0;

  refine_mem #(.N_BU(N_BU), .N_AU(N_AU), .ROWS(ROWS), .REFINE_W(RW), .READ_II(II), .READ_LAT(LAT)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [RW-1:0] words [NA];
  int acc_cyc [$];
  int acc_addr [$];
  int last_acc = -100;

  always @(posedge clk) begin
    if (rst_n && rd_valid && rd_ready) begin
      checks++;
      if (cyc - last_acc < II) begin failures++; $display("reads %0d cycles apart", cyc - last_acc); end
      last_acc = cyc;
      acc_cyc.push_back(cyc);
      acc_addr.push_back(int'(rd_addr));
    end
    if (rst_n && rsp_valid) begin
      int c, a;
      checks++;
      if (acc_cyc.size() == 0) begin failures++; $display("response without request"); end
      else begin
        c = acc_cyc.pop_front(); a = acc_addr.pop_front();
        if (cyc - c != LAT || int'(rsp_addr) != a || rsp_data !== words[a]) begin
          failures++;
          $display("response addr %0d data %h after %0d, expected addr %0d data %h after %0d",
                   rsp_addr, rsp_data, cyc - c, a, words[a], LAT);
        end
      end
    end
  end

  initial begin
    {we, rd_valid, waddr, rd_addr, wdata} = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < NA; a++) begin
      words[a] = RW'($urandom);
      @(negedge clk); we = 1; waddr = 6'(a); wdata = words[a];
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 60; n++) begin
      @(negedge clk);
      rd_valid = 1; rd_addr = 6'($urandom % NA);
      while (!rd_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk); rd_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (acc_cyc.size() != 0) begin failures++; $display("responses missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
