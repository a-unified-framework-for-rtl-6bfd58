// tb_rf_tile -- self-checking test of the register-file tile against a
// model array: writes, reads, read-before-write on OP_RFWR, reset to zero,
// hold under stall.
module tb_rf_tile;
  import rblk_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ctrl_t ctrl;
  logic [31:0] a, y;
  logic stall;
  rf_tile #(.DEPTH(16)) u_dut (.clk, .rst_n, .ctrl, .a, .stall, .y);

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

  logic [31:0] model [16];
  logic [31:0] prev;
  int k;
  initial begin
    ctrl = '0; a = 0; stall = 0;
    foreach (model[i]) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      prev = y;
      ctrl = '0; ctrl.valid = 1;
      k = $urandom % 3;
      ctrl.op = (k == 0) ? OP_RFW : (k == 1) ? OP_RFR : OP_RFWR;
      ctrl.rd = 5'($urandom % 16); ctrl.rs = 5'($urandom % 16);
      a = $urandom;
      stall = ($urandom % 10 == 0);
      @(negedge clk);
      if (stall) begin
        check("stall hold", y, prev);
      end else begin
        if (ctrl.op != OP_RFW) check("read", y, model[ctrl.rs]);
        else check("no read on write", y, prev);
        if (ctrl.op != OP_RFR) model[ctrl.rd] = a;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
