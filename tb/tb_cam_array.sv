// tb_cam_array: the 8 x 8 example of the published timing illustration
// (query 01011000 against eight stored codes) plus a random 32 x 16 array.
// For every row the Hamming distance is computed here, and ml_out[r] is
// checked in every cycle after the search: 0 before cycle hd+1, 1 from
// then on. Deleted rows (written with wvalid = 0) and rows after `clr`
// must stay 0; a row written during a search must not rise.
module tb_cam_array;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  // illustration array
  logic        clr8, we8, wv8, s8;
  logic [2:0]  wa8;
  logic [7:0]  wd8, sl8, ml8;
  cam_array #(.ROWS(8), .COLS(8)) dut8 (.clk, .rst_n, .clr(clr8), .we(we8), .waddr(wa8),
    .wdata(wd8), .wvalid(wv8), .search(s8), .sl(sl8), .ml_out(ml8));

  // random array
  logic        clr, we, wv, s;
  logic [4:0]  wa;
  logic [15:0] wd, sl;
  logic [31:0] ml;
  cam_array #(.ROWS(32), .COLS(16)) dut (.clk, .rst_n, .clr(clr), .we(we), .waddr(wa),
    .wdata(wd), .wvalid(wv), .search(s), .sl(sl), .ml_out(ml));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0]  fig_rows [8] = '{8'b11100001, 8'b01001010, 8'b10100111, 8'b01010000,
                                8'b10000101, 8'b11100111, 8'b11010010, 8'b00100110};
  logic [15:0] rrows [32];
  bit          rvalid [32];

  initial begin
    int hd;
    {clr8, we8, wv8, s8, wa8, wd8, sl8} = '0;
    {clr, we, wv, s, wa, wd, sl} = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 8; r++) begin
      @(negedge clk); we8 = 1; wa8 = 3'(r); wd8 = fig_rows[r]; wv8 = 1;
    end
    @(negedge clk); we8 = 0; s8 = 1; sl8 = 8'b01011000;
    @(negedge clk); s8 = 0;
    // now in cycle 1 after the search pulse
    for (int cyc = 1; cyc <= 9; cyc++) begin
      for (int r = 0; r < 8; r++) begin
        hd = $countones(fig_rows[r] ^ 8'b01011000);
        checks++;
        if (ml8[r] !== (cyc >= hd + 1)) begin
          failures++;
          $display("fig row %0d cycle %0d: ml=%0d hd=%0d", r, cyc, ml8[r], hd);
        end
      end
      @(negedge clk);
    end
    // random array, three searches with deletions and a write during search
    for (int r = 0; r < 32; r++) begin
      rrows[r] = 16'($urandom); rvalid[r] = ($urandom % 4) != 0;
      @(negedge clk); we = 1; wa = 5'(r); wd = rrows[r]; wv = rvalid[r];
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 3; n++) begin
      logic [15:0] q;
      q = 16'($urandom);
      @(negedge clk); s = 1; sl = q;
      @(negedge clk); s = 0;
      if (n == 2) begin       // rewrite row 5 during the search
        we = 1; wa = 5; wd = q; wv = 1;
      end
      for (int cyc = 1; cyc <= 18; cyc++) begin
        if (cyc == 2) we = 0;
        for (int r = 0; r < 32; r++) begin
          bit expv;
          hd = $countones(rrows[r] ^ q);
          expv = rvalid[r] && (cyc >= hd + 1);
          if (n == 2 && r == 5) expv = 0;
          checks++;
          if (ml[r] !== expv) begin
            failures++;
            if (failures < 10) $display("search %0d row %0d cycle %0d: ml=%0d exp %0d", n, r, cyc, ml[r], expv);
          end
        end
        @(negedge clk);
      end
      if (n == 2) begin rrows[5] = q; rvalid[5] = 1; end
    end
    // clear: nothing rises any more
    clr = 1; @(negedge clk); clr = 0;
    s = 1; @(negedge clk); s = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (ml != '0) begin failures++; $display("rows active after clr"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
