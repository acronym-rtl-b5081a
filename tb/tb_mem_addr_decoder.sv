// tb_mem_addr_decoder: exhaustive check of the hierarchical address decoder
// for a 4-BU x 8-AU x 16-row memory: for every address the BU and AU selects
// must be one-hot at the fields' values and the row must be the low field;
// with en low both selects must be zero.
module tb_mem_addr_decoder;
  localparam int N_BU = 4, N_AU = 8, ROWS = 16;
  logic [8:0] addr;
  logic en;
  logic [N_BU-1:0] bu_sel;
  logic [N_AU-1:0] au_sel;
  logic [3:0] row;
  int checks = 0, failures = 0;

  mem_addr_decoder #(.N_BU(N_BU), .N_AU(N_AU), .ROWS(ROWS)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < N_BU * N_AU * ROWS; a++) begin
      for (int e = 0; e < 2; e++) begin
        addr = 9'(a); en = e[0];
        #1;
        checks++;
        if (row != 4'(a % ROWS) ||
            bu_sel != (e ? N_BU'(1) << (a / (N_AU * ROWS)) : '0) ||
            au_sel != (e ? N_AU'(1) << ((a / ROWS) % N_AU) : '0)) begin
          failures++;
          if (failures < 10) $display("addr %0d en %0d: bu %b au %b row %0d", a, e, bu_sel, au_sel, row);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
