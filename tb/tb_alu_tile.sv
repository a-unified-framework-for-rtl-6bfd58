// tb_alu_tile -- self-checking test of the ALU tile: every operation against
// a reference computed here, immediate operand, accumulate, one-cycle
// latency, hold under stall and for foreign opcodes.
module tb_alu_tile;
  import rblk_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ctrl_t ctrl;
  logic [31:0] a, b, y;
  logic stall;
  alu_tile u_dut (.clk, .rst_n, .ctrl, .a, .b, .stall, .y);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  op_e ops [12] = '{OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_SHL, OP_SHR, OP_SRA,
                    OP_SLT, OP_MOVA, OP_MOVB, OP_ACC};
  logic [31:0] exp, bb, prev;
  initial begin
    ctrl = '0; a = 0; b = 0; stall = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      prev = y;
      ctrl = '0; ctrl.valid = 1; ctrl.op = ops[$urandom % 12];
      a = $urandom; b = $urandom;
      if ($urandom % 4 == 0) begin ctrl.use_imm = 1; ctrl.imm = $urandom; bb = ctrl.imm; end
      else bb = b;
      case (ctrl.op)
        OP_ADD:  exp = a + bb;
        OP_SUB:  exp = a - bb;
        OP_AND:  exp = a & bb;
        OP_OR:   exp = a | bb;
        OP_XOR:  exp = a ^ bb;
        OP_SHL:  exp = a << (bb % 32);
        OP_SHR:  exp = a >> (bb % 32);
        OP_SRA:  exp = 32'(signed'(a) >>> (bb % 32));
        OP_SLT:  exp = (signed'(a) < signed'(bb)) ? 1 : 0;
        OP_MOVA: exp = a;
        OP_MOVB: exp = bb;
        default: exp = prev + a;   // OP_ACC
      endcase
      @(negedge clk);
      check(ctrl.op.name(), y, exp);
      prev = y;
      if (n % 7 == 0) begin
        stall = 1; ctrl.op = OP_ADD;
        @(negedge clk);
        check("stall hold", y, prev);
        stall = 0; ctrl.op = OP_MUL;
        @(negedge clk);
        check("foreign op hold", y, prev);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
