// encoder: batch query encoder built from a weight-stationary systolic array
// of XAC processing elements (xac_pe), followed by a sign stage.
//
// Function: code[c] = (sum_i H[c][i] * q[i] >= 0), for a +/-1 projection
// matrix H of CODE_W x DIM and an INT16 query q of DIM elements. This is
// the random-projection-and-binarise encoding of the search algorithm.
//
// Structure. The array has ROWS x COLS PEs (64 x 64 in the published design).
// Row i of the array handles native dimension i of the current dimension
// tile, column j code bit j of the current code tile. Query elements enter
// at the left edge, skewed by one cycle per row, and move right; partial
// sums start at zero on the top edge and move down; the bottom edge gives
// one partial sum per column, skewed by one cycle per column. When DIM or
// CODE_W exceed the array, the work is split into DIM_TILES x CODE_TILES
// passes over the same batch of queries. For each pass the stationary
// weights of that tile are shifted in from the projection weight buffer,
// one array row per cycle (ROWS cycles). Partial sums of the dimension
// tiles of one code tile are added in a bottom accumulator; after the last
// dimension tile the sign stage keeps the inverted sign bit (1 = sum >= 0)
// and writes it into the encoded query buffer. The published encoder puts
// the sign stage directly under the bottom row; the accumulator across
// dimension tiles is this design's own addition for DIM > ROWS.
//
// Weight buffer: word address ((ct*DIM_TILES)+dt)*ROWS + r holds, for code
// tile ct and dimension tile dt, the COLS weight bits of native dimension
// dt*ROWS+r (bit j -> code bit ct*COLS+j); 0 encodes +1 and 1 encodes -1.
//
// Interface and timing. Queries arrive on a valid/ready port and are held
// in a batch register of up to BATCH queries; a batch starts when it is full
// or when no further query is offered. Each pass takes ROWS cycles of weight
// loading plus n + ROWS + COLS cycles of streaming for n queries, so a batch
// takes CODE_TILES*DIM_TILES*(2*ROWS + COLS + n) cycles plus one cycle per
// state change. Codes then leave one per cycle on a valid/ready port.
// Partial sums are DATA_W bits wide and wrap, as in the published INT16
// datapath.
module encoder #(
  parameter int ROWS   = 64,
  parameter int COLS   = 64,
  parameter int DIM    = 128,
  parameter int CODE_W = 256,
  parameter int BATCH  = 32,
  parameter int DATA_W = 16,
  localparam int DIM_TILES  = (DIM + ROWS - 1) / ROWS,
  localparam int CODE_TILES = (CODE_W + COLS - 1) / COLS,
  localparam int NWORDS     = DIM_TILES * CODE_TILES * ROWS,
  localparam int WA_W       = (NWORDS > 1) ? $clog2(NWORDS) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // projection weight buffer write port
  input  logic                   w_we,
  input  logic [WA_W-1:0]        w_addr,
  input  logic [COLS-1:0]        w_data,
  // query vectors in
  input  logic                   q_valid,
  output logic                   q_ready,
  input  logic [DIM-1:0][DATA_W-1:0] q_vec,
  // binary codes out
  output logic                   c_valid,
  input  logic                   c_ready,
  output logic [CODE_W-1:0]      c_code,
  output logic                   busy
);
  localparam int BI_W = $clog2(BATCH + 1);
  localparam int T_W  = $clog2(BATCH + ROWS + COLS + 2);
  localparam int CT_W = (CODE_TILES > 1) ? $clog2(CODE_TILES) : 1;
  localparam int DT_W = (DIM_TILES > 1) ? $clog2(DIM_TILES) : 1;
  localparam int R_W  = $clog2(ROWS);

  typedef enum logic [2:0] {S_COLLECT, S_LOAD, S_STREAM, S_SIGN, S_OUT} state_e;
  state_e state;

  logic [COLS-1:0]               wbuf [NWORDS];
  logic [DIM_TILES*ROWS-1:0][DATA_W-1:0] qbatch [BATCH];
  logic [CODE_W-1:0]             codes [BATCH];
  logic [COLS-1:0][DATA_W-1:0]   acc   [BATCH];

  logic [BI_W-1:0] n_q, out_idx;
  localparam int BQ_W = (BATCH > 1) ? $clog2(BATCH) : 1;
  logic [CT_W-1:0] ct;
  logic [DT_W-1:0] dt;
  logic [R_W-1:0]  ld_row;
  logic [T_W-1:0]  t;

  // ---- projection weight buffer ---------------------------------------------
  always_ff @(posedge clk) begin
    if (w_we) wbuf[w_addr] <= w_data;
  end

  // ---- systolic array ---------------------------------------------------------
  logic [DATA_W-1:0] qh [ROWS][COLS+1];  // horizontal query links
  logic [DATA_W-1:0] pv [ROWS+1][COLS];  // vertical partial-sum links
  logic [ROWS-1:0]   row_load;
  logic [COLS-1:0]   load_word;

  assign load_word = wbuf[WA_W'((int'(ct) * DIM_TILES + int'(dt)) * ROWS + int'(ld_row))];

  always_comb begin
    for (int i = 0; i < ROWS; i++) begin
      int k;
      k = int'(t) - i;
      row_load[i] = (state == S_LOAD) && (int'(ld_row) == i);
      if (state == S_STREAM && k >= 0 && k < int'(n_q))
        qh[i][0] = qbatch[k][int'(dt) * ROWS + i];
      else
        qh[i][0] = '0;
    end
    for (int j = 0; j < COLS; j++) pv[0][j] = '0;
  end

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      xac_pe #(.DATA_W(DATA_W)) u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .w_load(row_load[i]),
        .w_in  (load_word[j]),
        .q_i   (qh[i][j]),
        .psum_i(pv[i][j]),
        .q_o   (qh[i][j+1]),
        .psum_o(pv[i+1][j])
      );
    end
  end

  // ---- control, bottom accumulator, sign stage, encoded query buffer -------
  assign q_ready = (state == S_COLLECT) && (int'(n_q) < BATCH);
  assign c_valid = (state == S_OUT);
  assign c_code  = codes[out_idx[BQ_W-1:0]];
  assign busy    = (state != S_COLLECT) || (n_q != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_COLLECT;
      n_q     <= '0;
      out_idx <= '0;
      ct      <= '0;
      dt      <= '0;
      ld_row  <= '0;
      t       <= '0;
    end else begin
      unique case (state)
        S_COLLECT: begin
          if (q_valid && q_ready) begin
            for (int e = 0; e < DIM_TILES * ROWS; e++)
              qbatch[n_q[BQ_W-1:0]][e] <= (e < DIM) ? q_vec[e] : '0;
            n_q <= n_q + 1'b1;
          end
          if ((int'(n_q) == BATCH) || (n_q != '0 && !q_valid)) begin
            state  <= S_LOAD;
            ct     <= '0;
            dt     <= '0;
            ld_row <= '0;
          end
        end
        S_LOAD: begin
          ld_row <= ld_row + 1'b1;
          if (int'(ld_row) == ROWS - 1) begin
            state <= S_STREAM;
            t     <= '0;
          end
        end
        S_STREAM: begin
          t <= t + 1'b1;
          for (int j = 0; j < COLS; j++) begin
            int k;
            k = int'(t) - ROWS - j;
            if (k >= 0 && k < int'(n_q)) begin
              if (dt == '0) acc[k][j] <= pv[ROWS][j];
              else          acc[k][j] <= acc[k][j] + pv[ROWS][j];
            end
          end
          if (int'(t) == int'(n_q) + ROWS + COLS - 1) begin
            ld_row <= '0;
            if (int'(dt) == DIM_TILES - 1) state <= S_SIGN;
            else begin
              dt    <= dt + 1'b1;
              state <= S_LOAD;
            end
          end
        end
        S_SIGN: begin
          for (int k = 0; k < BATCH; k++)
            for (int j = 0; j < COLS; j++)
              if (int'(ct) * COLS + j < CODE_W)
                codes[k][int'(ct) * COLS + j] <= ~acc[k][j][DATA_W-1];
          dt <= '0;
          if (int'(ct) == CODE_TILES - 1) begin
            state   <= S_OUT;
            out_idx <= '0;
          end else begin
            ct    <= ct + 1'b1;
            state <= S_LOAD;
          end
        end
        S_OUT: begin
          if (c_ready) begin
            out_idx <= out_idx + 1'b1;
            if (out_idx == n_q - 1'b1) begin
              state <= S_COLLECT;
              n_q   <= '0;
            end
          end
        end
        default: state <= S_COLLECT;
      endcase
    end
  end
endmodule
