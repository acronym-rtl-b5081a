// acronym_top: one ACRONYM search module - a two-stage, CAM-based
// approximate nearest-neighbour search engine for a binary-coded vector
// database that can be updated while it is being searched.
//
// Data path (online): host bus -> query buffer -> encoder (XAC systolic
// array, random +/-1 projection and sign) -> encoded-query FIFO -> coarse
// CAM unit (parallel Hamming search of the coarse code of every item,
// time-latched pool, hierarchical address generation) -> address FIFO ->
// refinement memory (refinement code of each pool item, same address) ->
// refinement CAM unit (search of the pool with the refinement code,
// time-latched top-k) -> index buffer -> output port.
// Update path: host bus -> insertion / deletion queues of the update
// controller -> coarse CAM and refinement memory writes, one locked AU at a
// time, while the search continues.
//
// Host interface: cmd_valid/cmd_ready/cmd (acronym_pkg::bus_cmd_t, see
// bus_if). Results: for each query, in query order, zero or more item
// addresses (out_eoq = 0) followed by one end-of-query word (out_eoq = 1),
// on out_valid/out_ready. Each inserted item's address is reported on
// ins_ack_valid/ins_ack_addr; ins_drop pulses when the module is full.
//
// Item address = {BU, AU, row}. Default grid, as published: N_BU = 64 bank
// units of N_AU = 256 array units of 128 rows, 2,097,152 items, 21-bit
// addresses.
// Encoder: 64 x 64 array, INT16, DIM = 128 native dimensions, 256-bit codes
// (128 coarse + 128 refinement bits). The refinement CAM holds up to
// N_RAU*128 = 8192 pool candidates.
module acronym_top
  import acronym_pkg::*;
#(
  parameter int N_BU       = 64,
  parameter int N_AU       = 256,
  parameter int ROWS       = 128,
  parameter int COARSE_W   = 128,
  parameter int REFINE_W   = 128,
  parameter int DIM        = 128,
  parameter int DATA_W     = 16,
  parameter int ENC_ROWS   = 64,
  parameter int ENC_COLS   = 64,
  parameter int ENC_BATCH  = 32,
  parameter int N_RAU      = 64,
  parameter int QB_DEPTH   = 64,
  parameter int CF_DEPTH   = 16,
  parameter int AF_DEPTH   = 32,
  parameter int IB_DEPTH   = 64,
  parameter int READ_II    = 2,
  parameter int READ_LAT   = 4,
  parameter int UPD_BATCH  = 8,
  parameter int WR_LAT     = 8,
  parameter int T_W        = 16,
  parameter int COARSE_LT0 = 40,
  parameter int REFINE_LT0 = 40,
  localparam int CODE_W = COARSE_W + REFINE_W,
  localparam int RA_W   = $clog2(ROWS),
  localparam int AU_W   = (N_AU > 1) ? $clog2(N_AU) : 1,
  localparam int BU_W   = (N_BU > 1) ? $clog2(N_BU) : 1,
  localparam int A_W    = BU_W + AU_W + RA_W,
  localparam int DIM_TILES  = (DIM + ENC_ROWS - 1) / ENC_ROWS,
  localparam int CODE_TILES = (CODE_W + ENC_COLS - 1) / ENC_COLS,
  localparam int NWORDS = DIM_TILES * CODE_TILES * ENC_ROWS,
  localparam int WA_W   = (NWORDS > 1) ? $clog2(NWORDS) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cmd_valid,
  output logic           cmd_ready,
  input  bus_cmd_t       cmd,
  output logic           out_valid,
  input  logic           out_ready,
  output logic           out_eoq,
  output logic [A_W-1:0] out_addr,
  output logic           ins_ack_valid,
  output logic [A_W-1:0] ins_ack_addr,
  output logic           ins_drop,
  output logic [31:0]    queries_done,
  output logic           busy
);
  // ---- bus interface ------------------------------------------------------
  logic                   w_we;
  logic [WA_W-1:0]        w_addr;
  logic [ENC_COLS-1:0]    w_data;
  logic                   elem_valid, elem_ready;
  logic [15:0]            elem;
  logic                   ins_valid, ins_ready, del_valid, del_ready;
  logic [CODE_W-1:0]      ins_code;
  logic [A_W-1:0]         del_addr;
  logic [T_W-1:0]         coarse_lt, refine_lt;

  bus_if #(.COLS(ENC_COLS), .WA_W(WA_W), .CODE_W(CODE_W), .A_W(A_W), .T_W(T_W),
           .COARSE_LT0(COARSE_LT0), .REFINE_LT0(REFINE_LT0)) u_bus (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .w_we, .w_addr, .w_data, .elem_valid, .elem_ready, .elem,
    .ins_valid, .ins_ready, .ins_code, .del_valid, .del_ready, .del_addr,
    .coarse_lt, .refine_lt);

  // ---- query buffer and encoder -------------------------------------------------
  logic                       qv_valid, qv_ready;
  logic [DIM-1:0][DATA_W-1:0] qv;
  logic                       enc_valid, enc_ready, enc_busy;
  logic [CODE_W-1:0]          enc_code;

  query_buffer #(.DIM(DIM), .DATA_W(DATA_W), .DEPTH(QB_DEPTH)) u_qbuf (
    .clk, .rst_n, .elem_valid, .elem_ready, .elem(elem[DATA_W-1:0]),
    .q_valid(qv_valid), .q_ready(qv_ready), .q_vec(qv), .q_count());

  encoder #(.ROWS(ENC_ROWS), .COLS(ENC_COLS), .DIM(DIM), .CODE_W(CODE_W),
            .BATCH(ENC_BATCH), .DATA_W(DATA_W)) u_enc (
    .clk, .rst_n, .w_we, .w_addr, .w_data,
    .q_valid(qv_valid), .q_ready(qv_ready), .q_vec(qv),
    .c_valid(enc_valid), .c_ready(enc_ready), .c_code(enc_code), .busy(enc_busy));

  // ---- encoded-query FIFO ------------------------------------------------------
  logic              cq_valid, cq_ready;
  logic [CODE_W-1:0] cq_code;
  fifo_sync #(.WIDTH(CODE_W), .DEPTH(CF_DEPTH)) u_cfifo (
    .clk, .rst_n, .in_valid(enc_valid), .in_ready(enc_ready), .in_data(enc_code),
    .out_valid(cq_valid), .out_ready(cq_ready), .out_data(cq_code),
    .count(), .overflow());

  // ---- search controller ---------------------------------------------------------
  logic                coarse_start, coarse_done, refine_clear, refine_start, refine_done;
  logic                collect_idle, eoq_valid, eoq_ready, sc_busy;
  logic [COARSE_W-1:0] coarse_q;
  logic [REFINE_W-1:0] refine_q;

  search_ctrl #(.COARSE_W(COARSE_W), .REFINE_W(REFINE_W), .QC_W(32)) u_sctrl (
    .clk, .rst_n, .code_valid(cq_valid), .code_ready(cq_ready), .code(cq_code),
    .coarse_start, .coarse_q, .coarse_done, .refine_clear, .collect_idle,
    .refine_start, .refine_q, .refine_done, .eoq_valid, .eoq_ready,
    .q_count(queries_done), .busy(sc_busy));

  // ---- update controller --------------------------------------------------------
  logic                cam_we, cam_valid, mem_we, lock_en, uc_busy;
  logic [A_W-1:0]      cam_addr, mem_addr;
  logic [COARSE_W-1:0] cam_data;
  logic [REFINE_W-1:0] mem_data;
  logic [BU_W+AU_W-1:0] lock_au;

  update_ctrl #(.N_AU_TOT(N_BU * N_AU), .ROWS(ROWS), .COARSE_W(COARSE_W),
                .REFINE_W(REFINE_W), .BATCH(UPD_BATCH), .WR_LAT(WR_LAT)) u_uctrl (
    .clk, .rst_n, .ins_valid, .ins_ready, .ins_code, .del_valid, .del_ready, .del_addr,
    .cam_we, .cam_addr, .cam_data, .cam_valid, .mem_we, .mem_addr, .mem_data,
    .lock_en, .lock_au, .ins_ack_valid, .ins_ack_addr, .ins_drop, .busy(uc_busy));

  // ---- coarse CAM unit -------------------------------------------------------------
  logic           cc_valid, cc_ready, cc_busy;
  logic [A_W-1:0] cc_idx;

  coarse_cam_unit #(.N_BU(N_BU), .N_AU(N_AU), .ROWS(ROWS), .COLS(COARSE_W), .T_W(T_W)) u_coarse (
    .clk_in(clk), .rstn(rst_n),
    .ld_en(cam_we), .ld_addr(cam_addr), .din_b(cam_data), .ld_valid(cam_valid),
    .lock_en, .lock_au,
    .search_start(coarse_start), .din_q(coarse_q), .latch_time(coarse_lt),
    .valid_o(cc_valid), .idx_ready(cc_ready), .idx_b(cc_idx),
    .pool_done(coarse_done), .busy(cc_busy));

  // ---- address FIFO and refinement memory -------------------------------------------
  logic                af_valid, af_ready;
  logic [A_W-1:0]      af_addr;
  logic                rsp_valid;
  logic [A_W-1:0]      rsp_addr;
  logic [REFINE_W-1:0] rsp_data;
  logic [7:0]          inflight;

  fifo_sync #(.WIDTH(A_W), .DEPTH(AF_DEPTH)) u_afifo (
    .clk, .rst_n, .in_valid(cc_valid), .in_ready(cc_ready), .in_data(cc_idx),
    .out_valid(af_valid), .out_ready(af_ready), .out_data(af_addr),
    .count(), .overflow());

  refine_mem #(.N_BU(N_BU), .N_AU(N_AU), .ROWS(ROWS), .REFINE_W(REFINE_W),
               .READ_II(READ_II), .READ_LAT(READ_LAT)) u_rmem (
    .clk, .rst_n, .we(mem_we), .waddr(mem_addr), .wdata(mem_data),
    .rd_valid(af_valid), .rd_ready(af_ready), .rd_addr(af_addr),
    .rsp_valid, .rsp_addr, .rsp_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else inflight <= inflight + 8'(af_valid && af_ready) - 8'(rsp_valid);
  end
  assign collect_idle = !af_valid && (inflight == '0) && !cc_valid;

  // ---- refinement CAM unit ---------------------------------------------------------
  logic           rc_valid, rc_ready, rc_ovf, rc_busy;
  logic [A_W-1:0] rc_addr;

  refine_cam_unit #(.N_RAU(N_RAU), .ROWS(ROWS), .REFINE_W(REFINE_W), .A_W(A_W), .T_W(T_W)) u_refine (
    .clk, .rst_n, .clear(refine_clear),
    .cand_valid(rsp_valid), .cand_addr(rsp_addr), .cand_code(rsp_data),
    .search_start(refine_start), .q_code(refine_q), .latch_time(refine_lt),
    .out_valid(rc_valid), .out_ready(rc_ready), .out_addr(rc_addr),
    .done(refine_done), .overflow(rc_ovf), .n_written(), .busy(rc_busy));

  // ---- index buffer: top-k addresses, then the end-of-query marker ------------------
  logic           ib_in_valid, ib_in_ready;
  logic [A_W:0]   ib_in, ib_out;

  assign ib_in_valid = rc_valid || eoq_valid;
  assign ib_in       = rc_valid ? {1'b0, rc_addr} : {1'b1, A_W'(0)};
  assign rc_ready    = ib_in_ready;
  assign eoq_ready   = ib_in_ready && !rc_valid;

  fifo_sync #(.WIDTH(A_W + 1), .DEPTH(IB_DEPTH)) u_ibuf (
    .clk, .rst_n, .in_valid(ib_in_valid), .in_ready(ib_in_ready), .in_data(ib_in),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(ib_out),
    .count(), .overflow());

  assign out_eoq  = ib_out[A_W];
  assign out_addr = ib_out[A_W-1:0];
  assign busy     = enc_busy || cq_valid || sc_busy || uc_busy || cc_busy || rc_busy || qv_valid;
endmodule
