// tb_update_ctrl: update controller with 4 AUs of 4 rows, batches of up to
// 2 writes, 3-cycle write latency. A reference model of the allocation
// policy (empty AU first, else the AU with most free rows, lowest free row
// first) predicts the address of every insertion. Checked: acknowledged
// addresses, CAM and memory write data and addresses, that every write
// happens with the lock held on the written AU and that the lock is held
// for at least the write latency, deletions (CAM write with valid = 0),
// batching of two queued insertions into one locked AU, and the drop of an
// insertion when every row is taken.
module tb_update_ctrl;
  localparam int NA = 4, ROWS = 4, CW = 8, RW = 8, BATCH = 2, WR_LAT = 3, A_W = 4;
  logic clk = 0, rst_n = 0;
  logic ins_valid, ins_ready, del_valid, del_ready;
  logic [CW+RW-1:0] ins_code;
  logic [A_W-1:0] del_addr, cam_addr, mem_addr, ins_ack_addr;
  logic cam_we, cam_valid, mem_we, lock_en, ins_ack_valid, ins_drop, busy;
  logic [CW-1:0] cam_data;
  logic [RW-1:0] mem_data;
  logic [1:0] lock_au;
  int checks = 0, failures = 0;

  update_ctrl #(.N_AU_TOT(NA), .ROWS(ROWS), .COARSE_W(CW), .REFINE_W(RW), .BATCH(BATCH),
                .WR_LAT(WR_LAT), .Q_DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit occ [NA][ROWS];
  int acks [$];
  int drops = 0, lock_cycles = 0, batch_seen = 0;
  logic [CW+RW-1:0] last_code [$];
  int prev_ack_au = -1;
  bit lock_gap = 1;

  // monitor: every write is locked on its AU; record acknowledgements
  always @(posedge clk) if (rst_n) begin
    if (lock_en) lock_cycles++;
    if (mem_we) begin
      logic [CW+RW-1:0] c;
      checks++;
      c = last_code.pop_front();
      if (!lock_en || lock_au != mem_addr[A_W-1:2] || !cam_we || !cam_valid ||
          cam_addr != mem_addr || cam_data != c[CW-1:0] || mem_data != c[CW+RW-1:CW]) begin
        failures++;
        $display("bad write: lock %0d au %0d addr %0d", lock_en, lock_au, mem_addr);
      end
    end
    if (ins_ack_valid) begin
      if (!lock_gap && prev_ack_au == int'(ins_ack_addr[A_W-1:2])) batch_seen++;
      prev_ack_au = int'(ins_ack_addr[A_W-1:2]);
      lock_gap = 0;
      acks.push_back(int'(ins_ack_addr));
    end
    if (!lock_en) lock_gap = 1;
    if (ins_drop) drops++;
  end

  function automatic int model_alloc();
    int best, bestf;
    best = -1; bestf = 0;
    for (int a = 0; a < NA; a++) begin
      int f;
      f = 0;
      for (int r = 0; r < ROWS; r++) if (!occ[a][r]) f++;
      if (f == ROWS) return a;
      if (f > bestf) begin best = a; bestf = f; end
    end
    return best;
  endfunction

  task automatic insert(input bit wait_done);
    logic [CW+RW-1:0] c;
    c = 16'($urandom);
    last_code.push_back(c);
    @(negedge clk); ins_valid = 1; ins_code = c;
    while (!ins_ready) @(negedge clk);
    @(negedge clk); ins_valid = 0;
    if (wait_done) while (busy) @(negedge clk);
  endtask

  task automatic check_next(input int au);
    int a, r, exp_addr;
    r = -1;
    for (int k = ROWS - 1; k >= 0; k--) if (!occ[au][k]) r = k;
    exp_addr = au * ROWS + r;
    checks++;
    if (acks.size() == 0) begin failures++; $display("missing ack"); return; end
    a = acks.pop_front();
    if (a != exp_addr) begin failures++; $display("insert went to %0d, expected %0d", a, exp_addr); end
    occ[a / ROWS][a % ROWS] = 1;
  endtask

  task automatic delete(input int a);
    @(negedge clk); del_valid = 1; del_addr = A_W'(a);
    while (!del_ready) @(negedge clk);
    #1;
    @(negedge clk); del_valid = 0;
    fork
      begin
        bit seen;
        seen = 0;
        repeat (6) begin
          @(posedge clk);
          if (cam_we && !cam_valid && cam_addr == A_W'(a)) seen = 1;
        end
        checks++;
        if (!seen) begin failures++; $display("delete %0d not written to the CAM", a); end
      end
    join
    while (busy) @(negedge clk);
    occ[a / ROWS][a % ROWS] = 0;
  endtask

  initial begin
    int au;
    {ins_valid, ins_code, del_valid, del_addr} = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // one item at a time: spreads over the empty AUs first
    for (int n = 0; n < 6; n++) begin
      au = model_alloc();
      insert(1);
      check_next(au);
    end
    // two queued items go into one locked AU as a batch
    au = model_alloc();
    insert(0); insert(1);
    check_next(au); check_next(au);
    // deletions make AU 1 the one with most free rows
    delete(1 * ROWS + 0); delete(1 * ROWS + 1);
    au = model_alloc();
    checks++;
    if (au != 1) begin failures++; $display("model expected AU 1, got %0d", au); end
    insert(1); check_next(au);
    // fill everything, then one more must be dropped
    while (model_alloc() >= 0) begin
      au = model_alloc();
      insert(1); check_next(au);
    end
    last_code.push_back('0);
    @(negedge clk); ins_valid = 1; ins_code = '0;
    @(negedge clk); ins_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (drops != 1 || acks.size() != 0) begin failures++; $display("drops %0d extra acks %0d", drops, acks.size()); end
    checks++;
    if (batch_seen == 0) begin failures++; $display("no batched write seen"); end
    checks++;
    if (lock_cycles < 20 * WR_LAT) begin failures++; $display("lock held only %0d cycles", lock_cycles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
