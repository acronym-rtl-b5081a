// tb_encoder: checks the systolic encoder end to end on a reduced array
// (4 x 4 PEs, 6 native dimensions -> 2 dimension tiles, 12-bit codes -> 3
// code tiles, batches of up to 3 queries). Random +/-1 projection weights
// and random small INT16 queries; the expected code bit is computed here
// directly as (sum_i H[c][i]*q[i] >= 0). Also checks the batch latency
// formula CODE_TILES*DIM_TILES*(2*ROWS + COLS + n) + state overhead, by
// measuring the cycles from the batch start to the first code.
module tb_encoder;
  localparam int ROWS = 4, COLS = 4, DIM = 6, CODE_W = 12, BATCH = 3;
  localparam int DT = 2, CT = 3, NW = DT * CT * ROWS;
  logic clk = 0, rst_n = 0;
  logic w_we; logic [$clog2(NW)-1:0] w_addr; logic [COLS-1:0] w_data;
  logic q_valid, q_ready; logic [DIM-1:0][15:0] q_vec;
  logic c_valid, c_ready; logic [CODE_W-1:0] c_code; logic busy;
  int checks = 0, failures = 0;
  bit H [CODE_W][DIM];            // 1 means weight -1
  logic [DIM-1:0][15:0] qs [8];
  logic [CODE_W-1:0] expc [8];

  encoder #(.ROWS(ROWS), .COLS(COLS), .DIM(DIM), .CODE_W(CODE_W), .BATCH(BATCH), .DATA_W(16)) dut (.*);
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int got, t0, lat;
    w_we = 0; w_addr = 0; w_data = 0; q_valid = 0; q_vec = '0; c_ready = 1;
    for (int c = 0; c < CODE_W; c++) for (int i = 0; i < DIM; i++) H[c][i] = 1'($urandom);
    for (int k = 0; k < 8; k++) begin
      for (int i = 0; i < DIM; i++) qs[k][i] = 16'($signed(($urandom % 2001)) - 1000);
      expc[k] = '0;
      for (int c = 0; c < CODE_W; c++) begin
        int s;
        s = 0;
        for (int i = 0; i < DIM; i++) s += H[c][i] ? -int'($signed(qs[k][i])) : int'($signed(qs[k][i]));
        expc[k][c] = (s >= 0);
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // weight buffer: word ((ct*DT)+dt)*ROWS + r, bit j -> code ct*COLS+j, dim dt*ROWS+r
    for (int ct = 0; ct < CT; ct++) for (int dt = 0; dt < DT; dt++) for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      w_we = 1; w_addr = ((ct * DT) + dt) * ROWS + r;
      for (int j = 0; j < COLS; j++)
        w_data[j] = (dt * ROWS + r < DIM) ? H[ct * COLS + j][dt * ROWS + r] : 1'b0;
    end
    @(negedge clk); w_we = 0;
    // 8 queries: batches of 3, 3 and 2
    fork
      begin
        for (int k = 0; k < 8; k++) begin
          @(negedge clk);
          q_valid = 1; q_vec = qs[k];
          while (!q_ready) @(negedge clk);
          @(posedge clk);
          if (k == 2 || k == 5) begin
            @(negedge clk); q_valid = 0;
            wait (!busy);
          end
        end
        @(negedge clk); q_valid = 0;
      end
      begin
        int nb;
        got = 0; t0 = -1; nb = 0;
        while (got < 8) begin
          @(posedge clk);
          if (t0 < 0 && int'(dut.state) == 1) begin
            t0 = cyc;
            nb = int'(dut.n_q);
          end
          if (c_valid && c_ready) begin
            if (t0 >= 0) begin
              lat = cyc - t0;
              checks++;
              // passes * (ROWS load + n + ROWS + COLS stream) + CT sign cycles
              if (lat != CT * DT * (2 * ROWS + COLS + nb) + CT) begin
                failures++;
                $display("batch latency %0d, expected %0d", lat, CT * DT * (2 * ROWS + COLS + nb) + CT);
              end
              if (nb != 3 && nb != 2) begin
                failures++;
                $display("unexpected batch size %0d", nb);
              end
              t0 = -1;
            end
            checks++;
            if (c_code !== expc[got]) begin
              failures++;
              $display("query %0d code %b expected %b", got, c_code, expc[got]);
            end
            got++;
          end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
