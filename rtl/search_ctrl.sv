// search_ctrl: sequencer of the two-stage search of one query.
//
// The binary code of a query is split as in the offline setup: bits
// [COARSE_W-1:0] are the coarse part, the remaining REFINE_W bits the
// refinement part. For each code taken from the encoded-query FIFO the
// controller
//   S_IDLE    pops the code, starts the coarse search (coarse_start with
//             coarse_q) and clears the refinement CAM (refine_clear);
//   S_COARSE  waits while the coarse CAM streams candidate addresses into
//             the address FIFO, until coarse_done;
//   S_COLLECT waits until every candidate's refinement code has been read
//             from memory and written into the refinement CAM
//             (collect_idle: address FIFO empty, no read in flight);
//   S_REFINE  starts the refinement search (refine_start with refine_q) and
//             waits while the selected addresses go to the index buffer,
//             until refine_done;
//   S_EOQ     writes an end-of-query marker into the index buffer (eoq_valid,
//             held until eoq_ready) and returns to S_IDLE.
// The published text gives this order of steps; the state machine, the
// end-of-query marker and the one-query-at-a-time policy (the encoder works
// ahead through the FIFO, the two CAM stages do not overlap queries) are
// this design's. Latch times are the host-programmed values, used unchanged.
// q_count counts completed queries.
module search_ctrl #(
  parameter int COARSE_W = 128,
  parameter int REFINE_W = 128,
  parameter int QC_W     = 32,
  localparam int CODE_W  = COARSE_W + REFINE_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                code_valid,
  output logic                code_ready,
  input  logic [CODE_W-1:0]   code,
  output logic                coarse_start,
  output logic [COARSE_W-1:0] coarse_q,
  input  logic                coarse_done,
  output logic                refine_clear,
  input  logic                collect_idle,
  output logic                refine_start,
  output logic [REFINE_W-1:0] refine_q,
  input  logic                refine_done,
  output logic                eoq_valid,
  input  logic                eoq_ready,
  output logic [QC_W-1:0]     q_count,
  output logic                busy
);
  typedef enum logic [2:0] {S_IDLE, S_COARSE, S_COLLECT, S_REFINE, S_EOQ} state_e;
  state_e state;
  logic [REFINE_W-1:0] rq;
  logic                refine_started;

  assign code_ready   = (state == S_IDLE);
  assign coarse_start = (state == S_IDLE) && code_valid;
  assign coarse_q     = code[COARSE_W-1:0];
  assign refine_clear = coarse_start;
  assign refine_start = (state == S_COLLECT) && collect_idle;
  assign refine_q     = rq;
  assign eoq_valid    = (state == S_EOQ);
  assign busy         = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      rq             <= '0;
      q_count        <= '0;
      refine_started <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE:    if (code_valid) begin
                     rq    <= code[CODE_W-1:COARSE_W];
                     state <= S_COARSE;
                   end
        S_COARSE:  if (coarse_done) state <= S_COLLECT;
        S_COLLECT: if (collect_idle) begin
                     state          <= S_REFINE;
                     refine_started <= 1'b1;
                   end
        S_REFINE:  if (refine_done) begin
                     state          <= S_EOQ;
                     refine_started <= 1'b0;
                   end
        S_EOQ:     if (eoq_ready) begin
                     state   <= S_IDLE;
                     q_count <= q_count + 1'b1;
                   end
        default:   state <= S_IDLE;
      endcase
    end
  end

  // the refinement search is started exactly once per query
  a_one_refine: assert property (@(posedge clk) disable iff (!rst_n)
                                 refine_start |-> !refine_started);
endmodule
