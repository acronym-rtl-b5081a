// acronym_pkg: shared sizes, types and command encodings of the ACRONYM
// nearest-neighbour search engine.
//
// The hierarchy of the coarse CAM follows the published organisation: a
// 128x128 CAM array unit (AU), a 16x16 grid of AUs per bank unit (BU) and an
// 8x8 grid of BUs per module, which gives a 7-bit row index, an 8-bit AU
// header and a 6-bit BU header, i.e. a 21-bit item address (2M items).
// Those are the values named PAPER_* below, kept for reference; the modules
// take the grid size as parameters whose defaults are these values.
//
// The bus format and the command opcodes are choices of this
// implementation.
package acronym_pkg;

  // ---- published organisation --------------------------------------------
  localparam int PAPER_AU_ROWS   = 128;  // rows (items) per CAM array unit
  localparam int PAPER_AU_COLS   = 128;  // columns (code bits) per AU
  localparam int PAPER_AU_PER_BU = 256;  // 16x16 AUs in a bank unit
  localparam int PAPER_BU_PER_MOD = 64;  // 8x8 BUs in a module
  localparam int PAPER_ENC_DIM   = 64;   // systolic array rows (native dims per pass)
  localparam int PAPER_ENC_CODE  = 64;   // systolic array columns (code bits per pass)
  localparam int PAPER_DATA_W    = 16;   // INT16 query elements and partial sums

  // ---- host bus -------------------------------------------------------------
  localparam int BUS_DATA_W = 64;
  localparam int BUS_ADDR_W = 24;

  // ---- host bus commands ---------------------------------------------------
  typedef enum logic [2:0] {
    OP_NOP     = 3'd0,
    OP_WEIGHT  = 3'd1,  // addr = weight word index, data = one row of a weight tile
    OP_QUERY   = 3'd2,  // data[15:0] = next element of the query being assembled
    OP_CODE    = 3'd3,  // addr = 64-bit chunk index of the code to insert
    OP_INSERT  = 3'd4,  // commit assembled code into the insertion queue
    OP_DELETE  = 3'd5,  // addr = item address to delete
    OP_LATCH   = 3'd6   // data[15:0] = coarse latch time, data[31:16] = refinement latch time
  } bus_op_e;

  typedef struct packed {
    bus_op_e                 op;
    logic [BUS_ADDR_W-1:0]   addr;
    logic [BUS_DATA_W-1:0]   data;
  } bus_cmd_t;

endpackage
