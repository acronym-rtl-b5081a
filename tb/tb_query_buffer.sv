// tb_query_buffer: streams 12 queries of 5 elements each, one element per
// handshake with random gaps, and checks that whole vectors leave in order
// with element 0 in position 0. The FIFO (depth 3) is left unread for a
// while so that elem_ready is seen low (back-pressure) and nothing is lost.
module tb_query_buffer;
  localparam int DIM = 5, DEPTH = 3, NQ = 12;
  logic clk = 0, rst_n = 0;
  logic elem_valid, elem_ready, q_valid, q_ready;
  logic [15:0] elem;
  logic [DIM-1:0][15:0] q_vec;
  logic [$clog2(DEPTH):0] q_count;
  int checks = 0, failures = 0, n_bp = 0;
  logic [15:0] vals [NQ][DIM];

  query_buffer #(.DIM(DIM), .DATA_W(16), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    elem_valid = 0; elem = 0; q_ready = 0;
    for (int k = 0; k < NQ; k++) for (int e = 0; e < DIM; e++) vals[k][e] = 16'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      for (int k = 0; k < NQ; k++) for (int e = 0; e < DIM; e++) begin
        @(negedge clk);
        while ($urandom % 3 == 0) @(negedge clk);
        elem_valid = 1; elem = vals[k][e];
        while (!elem_ready) begin
          n_bp++;
          @(negedge clk);
        end
        @(posedge clk);
        #1 elem_valid = 0;
      end
      begin
        int got;
        got = 0;
        repeat (150) @(posedge clk);    // let the FIFO fill
        while (got < NQ) begin
          @(negedge clk);
          q_ready = ($urandom % 2);
          if (q_valid && q_ready) begin
            checks++;
            for (int e = 0; e < DIM; e++)
              if (q_vec[e] !== vals[got][e]) begin
                failures++;
                $display("query %0d element %0d = %h, expected %h", got, e, q_vec[e], vals[got][e]);
                break;
              end
            got++;
          end
          @(posedge clk);
        end
      end
    join
    checks++;
    if (n_bp == 0) begin
      failures++;
      $display("back-pressure never seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
