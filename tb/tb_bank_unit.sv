// tb_bank_unit: one bank unit of 4 AUs x 16 rows x 16 bits. Loads random
// codes, deletes a few, searches with several latch times (AU 2 locked in
// one search) and checks that the {AU, row} addresses emitted are exactly
// the expected candidates, each once, and that `pending` falls at the end.
module tb_bank_unit;
  localparam int N_AU = 4, ROWS = 16, COLS = 16, NI = N_AU * ROWS;
  logic clk = 0, rst_n = 0;
  logic we, wvalid, search, latch, idx_valid, idx_ready, pending;
  logic [3:0] lock;
  logic [5:0] waddr, idx;
  logic [COLS-1:0] wdata, sl;
  logic [15:0] latch_time, lcount;
  logic lbusy;
  int checks = 0, failures = 0;

  bank_unit #(.N_AU(N_AU), .ROWS(ROWS), .COLS(COLS)) dut (.*);
  latch_counter #(.T_W(16)) u_cnt (.clk, .rst_n, .start(search), .latch_time, .latch,
                                   .busy(lbusy), .count(lcount));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [COLS-1:0] codes [NI];
  bit valid [NI];

  initial begin
    {we, wvalid, search, idx_ready, lock, waddr, wdata, sl, latch_time} = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < NI; a++) begin
      codes[a] = COLS'($urandom); valid[a] = ($urandom % 6) != 0;
      @(negedge clk); we = 1; waddr = 6'(a); wdata = codes[a]; wvalid = valid[a];
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 6; n++) begin
      logic [COLS-1:0] q;
      int lt, nexp, ngot;
      bit seen [NI];
      bit lk;
      q = COLS'($urandom); lt = 5 + n; lk = (n == 2);
      nexp = 0;
      for (int a = 0; a < NI; a++) begin
        seen[a] = 0;
        if (valid[a] && !(lk && a / ROWS == 2) && $countones(codes[a] ^ q) < lt) nexp++;
      end
      @(negedge clk); search = 1; sl = q; latch_time = 16'(lt); lock = lk ? 4'b0100 : 4'b0000;
      @(negedge clk); search = 0;
      ngot = 0;
      for (int c = 1; c < lt + NI + 10; c++) begin
        idx_ready = ($urandom % 3) != 0;
        #1;
        if (idx_valid && idx_ready) begin
          int a;
          a = int'(idx);
          checks++;
          if (seen[a] || !valid[a] || (lk && a / ROWS == 2) || $countones(codes[a] ^ q) >= lt) begin
            failures++;
            $display("search %0d: unexpected address %0d", n, a);
          end
          seen[a] = 1;
          ngot++;
        end
        @(negedge clk);
      end
      checks++;
      if (ngot != nexp || pending) begin
        failures++;
        $display("search %0d: got %0d of %0d", n, ngot, nexp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
