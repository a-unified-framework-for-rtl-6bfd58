// tb_abu_tile -- self-checking test of the branch unit: start from PC 0,
// sequential counting, jump, branch-if-non-zero and branch-if-zero taken and
// not taken, hold under stall, halt, restart; the PC is compared each cycle
// with a model.
module tb_abu_tile;
  import rblk_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ctrl_t ctrl;
  logic [31:0] a;
  logic start, stall, running, halted, taken;
  logic [PC_W-1:0] pc;
  abu_tile u_dut (.clk, .rst_n, .ctrl, .a, .start, .stall, .pc, .running, .halted, .taken);

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
      $display("FAIL %s at %0t (pc=%0d)", what, $time, pc);
    end
  endtask

  logic [PC_W-1:0] mpc;
  bit mrun, jmp;
  int k;
  initial begin
    ctrl = '0; a = 0; start = 0; stall = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check("idle after reset", !running && !halted && pc == 0);
    start = 1;
    @(negedge clk);
    start = 0;
    mpc = 0; mrun = 1;
    check("running after start", running && pc == 0);
    for (int n = 0; n < 5000; n++) begin
      ctrl = '0;
      stall = ($urandom % 6 == 0);
      a = ($urandom % 2) ? 0 : $urandom;
      k = $urandom % 10;
      if (k < 4) begin
        ctrl.valid = 1;
        ctrl.op = (k == 0) ? OP_JMP : (k == 1) ? OP_BNZ : (k == 2) ? OP_BZ : OP_ADD;
        ctrl.imm = 32'($urandom % 256);
      end
      jmp = ctrl.valid && ((ctrl.op == OP_JMP) || (ctrl.op == OP_BNZ && a != 0) ||
                           (ctrl.op == OP_BZ && a == 0));
      @(negedge clk);
      if (!stall) mpc = jmp ? PC_W'(ctrl.imm) : mpc + 1;
      check("pc", pc == mpc);
      check("taken pulse", taken == (jmp && !stall));
    end
    // halt
    ctrl = '0; ctrl.valid = 1; ctrl.op = OP_HALT; stall = 0;
    @(negedge clk);
    ctrl = '0;
    mpc = pc;
    check("halted", halted && !running);
    repeat (3) @(negedge clk);
    check("pc frozen after halt", pc == mpc);
    start = 1;
    @(negedge clk);
    start = 0;
    check("restart", running && !halted && pc == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
