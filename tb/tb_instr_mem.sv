// tb_instr_mem -- self-checking test of the banked instruction memory:
// random writes to every bank, all banks read at the same address in the
// next cycle, hold when disabled, zero words when cleared.
module tb_instr_mem;
  import rblk_pkg::*;
  localparam int NB = 8, D = 256;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic we, en, clear;
  logic [2:0] wbank;
  logic [7:0] waddr, raddr;
  logic [31:0] wdata;
  logic [31:0] rdata [NB];
  instr_mem #(.N_BANK(NB), .DEPTH(D)) u_dut (.clk, .rst_n, .we, .wbank, .waddr, .wdata,
                                            .en, .clear, .raddr, .rdata);

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
      $display("FAIL %s raddr=%0d", what, raddr);
    end
  endtask

  logic [31:0] model [NB][D];
  logic [31:0] prev [NB];
  initial begin
    we = 0; en = 0; clear = 0; wbank = 0; waddr = 0; raddr = 0; wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int bk = 0; bk < NB; bk++)
      for (int w = 0; w < D; w++) begin
        @(negedge clk);
        we = 1; wbank = 3'(bk); waddr = 8'(w); wdata = $urandom; model[bk][w] = wdata;
      end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      prev = rdata;
      raddr = $urandom;
      en = ($urandom % 5 != 0);
      clear = ($urandom % 11 == 0);
      @(negedge clk);
      for (int bk = 0; bk < NB; bk++) begin
        if (clear) check("clear", rdata[bk] == 0);
        else if (en) check("read", rdata[bk] == model[bk][raddr]);
        else check("hold", rdata[bk] == prev[bk]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
