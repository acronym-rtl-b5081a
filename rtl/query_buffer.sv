// query_buffer: assembles queries element by element and holds whole query
// vectors until the encoder takes them.
//
// Queries reach the chip over the host bus one INT16 element per bus word.
// The buffer collects DIM consecutive elements into one vector (element 0
// first) and pushes the finished vector into a DEPTH-entry FIFO. The encoder
// pops vectors on a valid/ready port, so queries keep streaming in while a
// batch is being encoded, which is the role the published architecture
// gives this buffer. Element-wise assembly and the depth are this design's
// choices.
//
// Timing: an element is accepted in the cycle elem_valid && elem_ready; the
// vector completed by element DIM-1 is visible at the output one cycle
// later. elem_ready is low only while the FIFO is full and the assembly
// register already holds a complete vector.
module query_buffer #(
  parameter int DIM    = 128,
  parameter int DATA_W = 16,
  parameter int DEPTH  = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       elem_valid,
  output logic                       elem_ready,
  input  logic [DATA_W-1:0]          elem,
  output logic                       q_valid,
  input  logic                       q_ready,
  output logic [DIM-1:0][DATA_W-1:0] q_vec,
  output logic [$clog2(DEPTH):0]     q_count
);
  localparam int EI_W = $clog2(DIM + 1);

  logic [DIM-1:0][DATA_W-1:0] asm_vec;
  logic [EI_W-1:0]            n_elem;
  logic                       full_vec;
  logic                       f_ready, f_push;

  assign full_vec   = (int'(n_elem) == DIM);
  assign f_push     = full_vec;
  assign elem_ready = !full_vec || f_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_elem  <= '0;
      asm_vec <= '0;
    end else begin
      logic [EI_W-1:0] n;
      n = n_elem;
      if (full_vec && f_ready) n = '0;
      if (elem_valid && elem_ready) begin
        asm_vec[n[EI_W-1:0]] <= elem;
        n = n + 1'b1;
      end
      n_elem <= n;
    end
  end

  fifo_sync #(.WIDTH(DIM * DATA_W), .DEPTH(DEPTH)) u_fifo (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (f_push),
    .in_ready (f_ready),
    .in_data  (asm_vec),
    .out_valid(q_valid),
    .out_ready(q_ready),
    .out_data (q_vec),
    .count    (q_count),
    .overflow ()
  );
endmodule
