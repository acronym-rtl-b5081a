// tb_cam_au: one array unit (32 rows x 16 bits here). Random codes are
// written (some rows deleted), then searches with several latch times; the
// expected candidate set (valid rows with Hamming distance < latch time) is
// computed here and compared with the indices emitted, which must come in
// ascending order. A locked AU must emit nothing.
module tb_cam_au;
  localparam int ROWS = 32, COLS = 16;
  logic clk = 0, rst_n = 0;
  logic clr, we, wvalid, search, latch, lock, idx_valid, idx_ready, pending;
  logic [4:0] waddr, idx;
  logic [COLS-1:0] wdata, sl;
  logic [15:0] latch_time;
  logic lbusy;
  logic [15:0] lcount;
  int checks = 0, failures = 0;

  cam_au #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  latch_counter #(.T_W(16)) u_cnt (.clk, .rst_n, .start(search), .latch_time, .latch,
                                   .busy(lbusy), .count(lcount));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [COLS-1:0] rows [ROWS];
  bit valid [ROWS];

  initial begin
    {clr, we, wvalid, search, lock, idx_ready, waddr, wdata, sl, latch_time} = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      rows[r] = COLS'($urandom); valid[r] = ($urandom % 5) != 0;
      @(negedge clk); we = 1; waddr = 5'(r); wdata = rows[r]; wvalid = valid[r];
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 8; n++) begin
      logic [COLS-1:0] q;
      int lt, e;
      bit lk;
      q = COLS'($urandom); lt = 4 + n; lk = (n == 5);
      @(negedge clk); search = 1; sl = q; latch_time = 16'(lt); lock = lk;
      @(negedge clk); search = 0;
      e = 0;
      idx_ready = 1;
      repeat (lt + ROWS + 5) begin
        @(posedge clk); #1;
        if (idx_valid && idx_ready) begin
          while (e < ROWS && !(valid[e] && !lk && $countones(rows[e] ^ q) < lt)) e++;
          checks++;
          if (e >= ROWS || idx != 5'(e)) begin
            failures++;
            $display("search %0d: got %0d expected %0d", n, idx, e);
          end
          e++;
        end
      end
      while (e < ROWS && !(valid[e] && !lk && $countones(rows[e] ^ q) < lt)) e++;
      checks++;
      if (e != ROWS || pending) begin failures++; $display("search %0d: missing candidates from row %0d", n, e); end
      lock = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
