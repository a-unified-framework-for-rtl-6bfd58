// tb_id_tile -- self-checking test of the instruction-decode tile: field
// extraction, sign extension of the immediate, valid flag, undefined opcodes
// decoded as no-operation, one-cycle register and hold under stall.
module tb_id_tile;
  import rblk_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] instr;
  logic stall;
  ctrl_t ctrl;
  id_tile u_dut (.clk, .rst_n, .instr, .stall, .ctrl);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s instr=%h ctrl=%h", what, instr, ctrl);
    end
  endtask

  ctrl_t prev;
  int o;
  bit defined;
  initial begin
    instr = 0; stall = 0;
    repeat (2) @(posedge clk);
    check("nop after reset", ctrl == '0);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      prev = ctrl;
      instr = $urandom;
      stall = ($urandom % 8 == 0);
      o = instr[31:27];
      defined = (o >= 1 && o <= 12) || o == 16 || o == 20 || o == 21 ||
                (o >= 24 && o <= 26) || (o >= 28 && o <= 31);
      @(negedge clk);
      if (stall) check("hold under stall", ctrl == prev);
      else begin
        check("valid", ctrl.valid == defined);
        check("op", defined ? (int'(ctrl.op) == o) : (ctrl.op == OP_NOP));
        check("fields", ctrl.use_imm == instr[26] && ctrl.rd == instr[25:21] &&
                        ctrl.rs == instr[20:16]);
        check("imm sign extension", signed'(ctrl.imm) == 32'(signed'(instr[15:0])));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
