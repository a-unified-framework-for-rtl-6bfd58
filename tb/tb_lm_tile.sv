// tb_lm_tile -- self-checking test of the local-memory tile against a model
// array: stores and loads at base + offset addresses, address wrap, load
// latency of one cycle, no access under stall.
module tb_lm_tile;
  import rblk_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ctrl_t ctrl;
  logic [31:0] a, b, y;
  logic stall;
  lm_tile #(.DEPTH(64)) u_dut (.clk, .rst_n, .ctrl, .a, .b, .stall, .y);

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

  logic [31:0] model [64];
  logic [31:0] prev;
  int unsigned ad;
  initial begin
    ctrl = '0; a = 0; b = 0; stall = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin   // fill
      @(negedge clk);
      ctrl = '0; ctrl.valid = 1; ctrl.op = OP_ST; a = 32'(i); ctrl.imm = 0;
      b = $urandom; model[i] = b;
    end
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      prev = y;
      ctrl = '0; ctrl.valid = 1;
      ctrl.op = ($urandom % 2) ? OP_LD : OP_ST;
      a = $urandom % 200; ctrl.imm = $urandom % 100;
      ad = (a + ctrl.imm) % 64;
      b = $urandom;
      stall = ($urandom % 8 == 0);
      @(negedge clk);
      if (stall) check("stall hold", y, prev);
      else if (ctrl.op == OP_LD) check("load", y, model[ad]);
      else begin
        check("store keeps y", y, prev);
        model[ad] = b;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
