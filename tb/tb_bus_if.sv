// tb_bus_if: sends one command of each kind and checks where it lands:
// weight words on the weight write port, query elements on the query port
// (held back while that port is not ready), a 256-bit code assembled from
// four chunks and handed over by OP_INSERT, a deletion address, and the two
// latch times (including their reset values).
module tb_bus_if;
  import acronym_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, w_we, elem_valid, elem_ready, ins_valid, ins_ready, del_valid, del_ready;
  bus_cmd_t cmd;
  logic [8:0] w_addr;
  logic [63:0] w_data;
  logic [15:0] elem, coarse_lt, refine_lt;
  logic [255:0] ins_code;
  logic [14:0] del_addr;
  int checks = 0, failures = 0;

  bus_if #(.COLS(64), .WA_W(9), .CODE_W(256), .A_W(15), .T_W(16), .COARSE_LT0(40), .REFINE_LT0(30)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("failed: %s", what); end
  endtask

  task automatic send(input bus_op_e op, input int addr, input logic [63:0] data);
    @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.addr = 24'(addr); cmd.data = data;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
  endtask

  initial begin
    logic [255:0] code;
    cmd_valid = 0; cmd = '0; elem_ready = 1; ins_ready = 1; del_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 chk(coarse_lt == 40 && refine_lt == 30, "reset latch times");
    send(OP_WEIGHT, 300, 64'hDEADBEEF_01234567);
    chk(w_we && w_addr == 300 && w_data == 64'hDEADBEEF_01234567 && !elem_valid && !ins_valid, "weight");
    elem_ready = 0;
    send(OP_NOP, 0, 0);
    @(negedge clk); cmd_valid = 1; cmd.op = OP_QUERY; cmd.data = 64'h1234; #1;
    chk(elem_valid && !cmd_ready && elem == 16'h1234, "query element held");
    elem_ready = 1; #1;
    chk(cmd_ready, "query element accepted");
    for (int c = 0; c < 4; c++) begin
      code[c*64 +: 64] = {$urandom, $urandom};
      send(OP_CODE, c, code[c*64 +: 64]);
      chk(!ins_valid, "no insert on code chunk");
    end
    ins_ready = 0;
    @(negedge clk); cmd_valid = 1; cmd.op = OP_INSERT; #1;
    chk(ins_valid && !cmd_ready && ins_code == code, "insert code assembled");
    ins_ready = 1;
    send(OP_DELETE, 1234, 0);
    chk(del_valid && del_addr == 1234, "delete");
    send(OP_LATCH, 0, 64'h0007_0011);
    @(negedge clk); cmd_valid = 0; #1;
    chk(coarse_lt == 16'h11 && refine_lt == 16'h7, "latch times");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
