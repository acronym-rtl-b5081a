// update_ctrl: dynamic update manager (insertions and deletions while the
// search keeps running).
//
// Published policy, as implemented here:
//  * Insertions wait in a Data Insertion Queue and deletions in a deletion
//    queue, so updates never hold up the query path.
//  * Insertions are written in batches (up to BATCH items) into a single
//    array unit (AU). Only that AU is locked (lock_en/lock_au) while it is
//    written; the coarse CAM leaves a locked AU out of searches and all
//    other AUs keep serving queries.
//  * The target AU is an empty AU if there is one, otherwise the AU with the
//    most deleted (free) rows.
// This design's choices: occupancy is a valid bitmap per AU kept in the
// controller (one bit per item), so "most deletions" is "most free rows";
// the AU choice is a scan over all AUs, one AU per cycle; the first free row
// of the chosen AU is filled first; a deletion only clears the item's valid
// flag (in the CAM and in the bitmap), without locking; every NVM write is
// followed by WR_LAT wait cycles with the lock held; when no AU has a free
// row, the insertion is dropped and ins_drop pulses. Each written item's
// address (its ID for later deletion and in search results) is reported on
// ins_ack_valid/ins_ack_addr. The periodic logical-to-physical AU remapping
// against write hotspots is not implemented.
//
// Ports: queue inputs ins_valid/ins_ready/ins_code (CODE_W bits = coarse
// part in the low COARSE_W bits, refinement part above) and
// del_valid/del_ready/del_addr; writes to the coarse CAM (cam_we, cam_addr,
// cam_data, cam_valid) and the refinement memory (mem_we, mem_addr,
// mem_data) happen in the same cycle.
module update_ctrl #(
  parameter int N_AU_TOT = 16384,    // AUs in the module (BUs x AUs per BU)
  parameter int ROWS     = 128,
  parameter int COARSE_W = 128,
  parameter int REFINE_W = 128,
  parameter int BATCH    = 8,
  parameter int WR_LAT   = 8,
  parameter int Q_DEPTH  = 16,
  localparam int CODE_W  = COARSE_W + REFINE_W,
  localparam int RA_W    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int GA_W    = (N_AU_TOT > 1) ? $clog2(N_AU_TOT) : 1,
  localparam int A_W     = GA_W + RA_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                ins_valid,
  output logic                ins_ready,
  input  logic [CODE_W-1:0]   ins_code,
  input  logic                del_valid,
  output logic                del_ready,
  input  logic [A_W-1:0]      del_addr,
  output logic                cam_we,
  output logic [A_W-1:0]      cam_addr,
  output logic [COARSE_W-1:0] cam_data,
  output logic                cam_valid,
  output logic                mem_we,
  output logic [A_W-1:0]      mem_addr,
  output logic [REFINE_W-1:0] mem_data,
  output logic                lock_en,
  output logic [GA_W-1:0]     lock_au,
  output logic                ins_ack_valid,
  output logic [A_W-1:0]      ins_ack_addr,
  output logic                ins_drop,
  output logic                busy
);
  localparam int F_W  = $clog2(ROWS + 1);
  localparam int B_W  = $clog2(BATCH + 1);
  localparam int WL_W = $clog2(WR_LAT + 2);

  typedef enum logic [2:0] {S_IDLE, S_DEL, S_SCAN, S_WRITE, S_WAIT, S_UNLOCK} state_e;
  state_e state;

  logic [ROWS-1:0]   occ [N_AU_TOT];
  logic [GA_W-1:0]   scan_au, best_au;
  logic [F_W-1:0]    best_free, scan_free;
  logic              scan_empty;
  logic [B_W-1:0]    n_batch;
  logic [WL_W-1:0]   wait_cnt;

  // ---- queues -----------------------------------------------------------------
  logic              iq_valid, iq_pop, dq_valid, dq_pop;
  logic [CODE_W-1:0] iq_code;
  logic [A_W-1:0]    dq_addr;
  logic [$clog2(Q_DEPTH):0] ins_cnt, del_cnt;   // queue levels (observation only)
  logic              ins_ovf, del_ovf;          // queue-full flags (observation only)

  fifo_sync #(.WIDTH(CODE_W), .DEPTH(Q_DEPTH)) u_insq (
    .clk(clk), .rst_n(rst_n),
    .in_valid(ins_valid), .in_ready(ins_ready), .in_data(ins_code),
    .out_valid(iq_valid), .out_ready(iq_pop), .out_data(iq_code),
    .count(ins_cnt), .overflow(ins_ovf));
  fifo_sync #(.WIDTH(A_W), .DEPTH(Q_DEPTH)) u_delq (
    .clk(clk), .rst_n(rst_n),
    .in_valid(del_valid), .in_ready(del_ready), .in_data(del_addr),
    .out_valid(dq_valid), .out_ready(dq_pop), .out_data(dq_addr),
    .count(del_cnt), .overflow(del_ovf));

  // ---- free rows of the AU under scan, first free row of the locked AU -------
  logic [RA_W-1:0] free_row;
  logic            has_free;
  always_comb begin
    scan_free = F_W'(ROWS) - F_W'($countones(occ[scan_au]));
    scan_empty = (occ[scan_au] == '0);
    free_row = '0;
    has_free = 1'b0;
    for (int r = ROWS - 1; r >= 0; r--)
      if (!occ[best_au][r]) begin
        free_row = RA_W'(r);
        has_free = 1'b1;
      end
  end

  // ---- outputs ----------------------------------------------------------------
  logic do_write, do_del, do_drop;
  assign do_write = (state == S_WRITE) && iq_valid && has_free;
  assign do_del   = (state == S_DEL);
  assign do_drop  = (state == S_SCAN) && !scan_empty && (int'(scan_au) == N_AU_TOT - 1) &&
                    (scan_free == '0) && (best_free == '0);
  assign iq_pop   = do_write || do_drop;
  assign dq_pop   = do_del;

  assign cam_we    = do_write || do_del;
  assign cam_addr  = do_del ? dq_addr : {best_au, free_row};
  assign cam_data  = iq_code[COARSE_W-1:0];
  assign cam_valid = do_write;
  assign mem_we    = do_write;
  assign mem_addr  = {best_au, free_row};
  assign mem_data  = iq_code[CODE_W-1:COARSE_W];
  assign lock_en   = (state == S_WRITE) || (state == S_WAIT);
  assign lock_au   = best_au;
  assign ins_ack_valid = do_write;
  assign ins_ack_addr  = {best_au, free_row};
  assign busy      = (state != S_IDLE) || iq_valid || dq_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      scan_au   <= '0;
      best_au   <= '0;
      best_free <= '0;
      n_batch   <= '0;
      wait_cnt  <= '0;
      ins_drop  <= 1'b0;
      for (int a = 0; a < N_AU_TOT; a++) occ[a] <= '0;
    end else begin
      ins_drop <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (dq_valid)      state <= S_DEL;
          else if (iq_valid) begin
            state     <= S_SCAN;
            scan_au   <= '0;
            best_free <= '0;
          end
        end
        S_DEL: begin
          occ[dq_addr[A_W-1:RA_W]][dq_addr[RA_W-1:0]] <= 1'b0;
          state <= S_IDLE;
        end
        S_SCAN: begin
          if (scan_empty) begin
            // an empty AU wins at once
            best_au   <= scan_au;
            best_free <= scan_free;
            state     <= S_WRITE;
            n_batch   <= '0;
          end else begin
            if (scan_free > best_free) begin
              best_au   <= scan_au;
              best_free <= scan_free;
            end
            if (int'(scan_au) == N_AU_TOT - 1) begin
              n_batch <= '0;
              if (do_drop) begin
                // module full: the insertion is dropped
                ins_drop <= 1'b1;
                state    <= S_IDLE;
              end else state <= S_WRITE;
            end else scan_au <= scan_au + 1'b1;
          end
        end
        S_WRITE: begin
          if (do_write) begin
            occ[best_au][free_row] <= 1'b1;
            n_batch  <= n_batch + 1'b1;
            wait_cnt <= '0;
            state    <= S_WAIT;
          end else begin
            state <= S_UNLOCK;
          end
        end
        S_WAIT: begin
          wait_cnt <= wait_cnt + 1'b1;
          if (int'(wait_cnt) >= WR_LAT - 1) begin
            if (int'(n_batch) < BATCH && iq_valid && !dq_valid) state <= S_WRITE;
            else                                                 state <= S_UNLOCK;
          end
        end
        S_UNLOCK: state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  // only one AU is ever locked, and writes go only to the locked AU
  a_write_locked: assert property (@(posedge clk) disable iff (!rst_n)
                                   mem_we |-> (lock_en && mem_addr[A_W-1:RA_W] == lock_au));
endmodule
