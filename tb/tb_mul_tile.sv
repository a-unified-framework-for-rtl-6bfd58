// tb_mul_tile -- self-checking test of the accurate and approximate
// multiplier tiles: OP_MUL with register and immediate operand, one-cycle
// latency, hold under stall and for foreign opcodes, and that the Ax tile
// returns the DRUM7 product (reference computed here) while the accurate
// tile returns the exact product.
module tb_mul_tile;
  import rblk_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ctrl_t ctrl;
  logic [31:0] a, b, y_acc, y_ax;
  logic stall;
  mul_tile #(.APPROX(0))        u_acc (.clk, .rst_n, .ctrl, .a, .b, .stall, .y(y_acc));
  mul_tile #(.APPROX(1), .K(7)) u_ax  (.clk, .rst_n, .ctrl, .a, .b, .stall, .y(y_ax));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_drum(longint x, longint y, int k);
    longint mx, my, tx, ty, r;
    int lx, ly, sx, sy;
    mx = (x < 0) ? -x : x;
    my = (y < 0) ? -y : y;
    lx = 0; for (longint t = mx; t > 1; t = t / 2) lx++;
    ly = 0; for (longint t = my; t > 1; t = t / 2) ly++;
    sx = (lx >= k) ? lx - k + 1 : 0;
    sy = (ly >= k) ? ly - k + 1 : 0;
    tx = (sx > 0) ? ((mx >> sx) | 1) : mx;
    ty = (sy > 0) ? ((my >> sy) | 1) : my;
    r  = (tx * ty) << (sx + sy);
    return ((x < 0) != (y < 0)) ? -r : r;
  endfunction

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, signed'(got), signed'(exp));
    end
  endtask

  int x, z;
  logic [31:0] prev_acc, prev_ax;
  initial begin
    ctrl = '0; a = 0; b = 0; stall = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      x = int'($urandom % 256) - 128;
      z = int'($urandom % 256) - 128;
      @(negedge clk);
      ctrl = '0; ctrl.valid = 1; ctrl.op = OP_MUL;
      a = 32'(x);
      if (n % 5 == 0) begin ctrl.use_imm = 1; ctrl.imm = 32'(z); b = 32'hdead; end
      else b = 32'(z);
      @(negedge clk);   // result one cycle later
      check("accurate", y_acc, 32'(x * z));
      check("approx",   y_ax,  32'(ref_drum(x, z, 7)));
      // hold: stall, then foreign opcode
      prev_acc = y_acc; prev_ax = y_ax;
      stall = 1; a = 32'(x + 1);
      @(negedge clk);
      check("stall hold acc", y_acc, prev_acc);
      check("stall hold ax", y_ax, prev_ax);
      stall = 0; ctrl.op = OP_ADD;
      @(negedge clk);
      check("foreign op hold", y_acc, prev_acc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
