// tb_coarse_cam_unit: coarse CAM with 2 BUs x 2 AUs x 16 rows of 16 bits
// (64 items). Random codes are loaded through ld_en/ld_addr/din_b, some
// items deleted; then searches with different latch times, one with an AU
// locked. The candidate addresses emitted on valid_o/idx_b must be exactly
// the set {address : valid, AU not locked, Hamming distance < latch time}
// computed here, each address once and each made of {BU, AU, row}; pool_done
// must pulse once, after the last address, and the first address must not
// appear before latch_time + 1 cycles.
module tb_coarse_cam_unit;
  localparam int N_BU = 2, N_AU = 2, ROWS = 16, COLS = 16, NI = N_BU * N_AU * ROWS;
  logic clk = 0, rstn = 0;
  logic ld_en, ld_valid, lock_en, search_start, valid_o, idx_ready, pool_done, busy;
  logic [5:0] ld_addr, idx_b;
  logic [1:0] lock_au;
  logic [COLS-1:0] din_b, din_q;
  logic [15:0] latch_time;
  int checks = 0, failures = 0;

  coarse_cam_unit #(.N_BU(N_BU), .N_AU(N_AU), .ROWS(ROWS), .COLS(COLS)) dut (.clk_in(clk), .*);
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
    {ld_en, ld_valid, lock_en, search_start, idx_ready, ld_addr, lock_au, din_b, din_q, latch_time} = '0;
    repeat (2) @(posedge clk);
    rstn = 1;
    for (int a = 0; a < NI; a++) begin
      codes[a] = COLS'($urandom); valid[a] = 1;
      @(negedge clk); ld_en = 1; ld_addr = 6'(a); din_b = codes[a]; ld_valid = 1;
    end
    for (int a = 0; a < NI; a += 7) begin          // delete some items
      valid[a] = 0;
      @(negedge clk); ld_en = 1; ld_addr = 6'(a); ld_valid = 0;
    end
    @(negedge clk); ld_en = 0;
    for (int n = 0; n < 6; n++) begin
      logic [COLS-1:0] q;
      int lt, nexp, ngot, ndone, first;
      bit seen [NI];
      bit lk;
      q = COLS'($urandom); lt = 5 + n; lk = (n == 3);
      nexp = 0;
      for (int a = 0; a < NI; a++) begin
        seen[a] = 0;
        if (valid[a] && !(lk && a / ROWS == 1) && $countones(codes[a] ^ q) < lt) nexp++;
      end
      @(negedge clk); search_start = 1; din_q = q; latch_time = 16'(lt);
      lock_en = lk; lock_au = 2'd1;
      @(negedge clk); search_start = 0;
      ngot = 0; ndone = 0; first = -1;
      for (int c = 1; c < lt + NI + 10; c++) begin
        idx_ready = ($urandom % 4) != 0;
        #1;
        if (valid_o && idx_ready) begin
          int a;
          a = int'(idx_b);
          if (first < 0) first = c;
          checks++;
          if (seen[a] || !valid[a] || (lk && a / ROWS == 1) || $countones(codes[a] ^ q) >= lt) begin
            failures++;
            $display("search %0d: unexpected address %0d", n, a);
          end
          seen[a] = 1;
          ngot++;
        end
        if (pool_done) begin
          ndone++;
          checks++;
          if (ngot != nexp) begin failures++; $display("search %0d: pool_done after %0d of %0d", n, ngot, nexp); end
        end
        @(negedge clk);
      end
      checks++;
      if (ndone != 1 || ngot != nexp || (first >= 0 && first <= lt)) begin
        failures++;
        $display("search %0d: done %0d, got %0d of %0d, first at %0d", n, ndone, ngot, nexp, first);
      end
      lock_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
