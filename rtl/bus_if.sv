// bus_if: host-side data bus interface of one ACRONYM module.
//
// The published architecture has a data bus and external interface through
// which the system is configured offline, memories are loaded and queries
// and updates arrive. Its format is not published; this module defines one.
// A host command (acronym_pkg::bus_cmd_t: opcode, 24-bit address, 64-bit
// data) is offered on cmd_valid/cmd_ready and is routed as follows:
//   OP_WEIGHT  one word (COLS bits) of the projection weight buffer,
//              at address addr (written in the accepting cycle);
//   OP_QUERY   one INT16 query element, data[15:0], to the query buffer
//              (waits for its ready);
//   OP_CODE    64-bit chunk addr of the code being assembled for insertion;
//   OP_INSERT  hands the assembled code to the insertion queue (waits for
//              its ready);
//   OP_DELETE  item address addr to the deletion queue (waits for its ready);
//   OP_LATCH   sets the coarse (data[15:0]) and refinement (data[31:16])
//              latch times, which decide the approximate pool sizes.
// Unknown opcodes are accepted and ignored. Latch times reset to
// COARSE_LT0 and REFINE_LT0.
module bus_if
  import acronym_pkg::*;
#(
  parameter int COLS       = 64,
  parameter int WA_W       = 9,
  parameter int CODE_W     = 256,
  parameter int A_W        = 21,
  parameter int T_W        = 16,
  parameter int COARSE_LT0 = 40,
  parameter int REFINE_LT0 = 40
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  bus_cmd_t          cmd,
  output logic              w_we,
  output logic [WA_W-1:0]   w_addr,
  output logic [COLS-1:0]   w_data,
  output logic              elem_valid,
  input  logic              elem_ready,
  output logic [15:0]       elem,
  output logic              ins_valid,
  input  logic              ins_ready,
  output logic [CODE_W-1:0] ins_code,
  output logic              del_valid,
  input  logic              del_ready,
  output logic [A_W-1:0]    del_addr,
  output logic [T_W-1:0]    coarse_lt,
  output logic [T_W-1:0]    refine_lt
);
  localparam int NCH = (CODE_W + BUS_DATA_W - 1) / BUS_DATA_W;
  logic [NCH*BUS_DATA_W-1:0] code_asm;

  always_comb begin
    cmd_ready = 1'b1;
    unique case (cmd.op)
      OP_QUERY:  cmd_ready = elem_ready;
      OP_INSERT: cmd_ready = ins_ready;
      OP_DELETE: cmd_ready = del_ready;
      default:   cmd_ready = 1'b1;
    endcase
  end

  assign w_we       = cmd_valid && (cmd.op == OP_WEIGHT);
  assign w_addr     = cmd.addr[WA_W-1:0];
  assign w_data     = cmd.data[COLS-1:0];
  assign elem_valid = cmd_valid && (cmd.op == OP_QUERY);
  assign elem       = cmd.data[15:0];
  assign ins_valid  = cmd_valid && (cmd.op == OP_INSERT);
  assign ins_code   = code_asm[CODE_W-1:0];
  assign del_valid  = cmd_valid && (cmd.op == OP_DELETE);
  assign del_addr   = cmd.addr[A_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code_asm  <= '0;
      coarse_lt <= T_W'(COARSE_LT0);
      refine_lt <= T_W'(REFINE_LT0);
    end else if (cmd_valid && cmd_ready) begin
      if (cmd.op == OP_CODE)
        for (int c = 0; c < NCH; c++)
          if (int'(cmd.addr) == c) code_asm[c*BUS_DATA_W +: BUS_DATA_W] <= cmd.data;
      if (cmd.op == OP_LATCH) begin
        coarse_lt <= cmd.data[T_W-1:0];
        refine_lt <= cmd.data[16 +: T_W];
      end
    end
  end
endmodule
