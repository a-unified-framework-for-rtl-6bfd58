// tb_lsu_tile -- self-checking test of the load/store unit: a responder here
// answers each request after a random delay; checked are the request
// fields (word address = a + imm, store data, direction), that stall_req is
// high from the opcode until the response and low in the retire cycle,
// that a load returns the response data on y at the retire edge, and that each instruction
// produces exactly one request even if the global stall stays high after
// the response.
module tb_lsu_tile;
  import rblk_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ctrl_t ctrl;
  logic [31:0] a, b, y;
  logic stall, stall_req, ext_stall;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  assign stall = stall_req | ext_stall;
  lsu_tile u_dut (.clk, .rst_n, .ctrl, .a, .b, .stall, .stall_req, .mreq, .mrsp, .y);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int n_req = 0;
  logic [31:0] rdata;
  int lat, waited;
  logic [31:0] prev_y = 0;
  initial begin
    ctrl = '0; a = 0; b = 0; ext_stall = 0; mrsp = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      ctrl = '0; ctrl.valid = 1;
      ctrl.op = ($urandom % 2) ? OP_LD : OP_ST;
      a = $urandom % 1000; ctrl.imm = $urandom % 50; b = $urandom;
      #1;
      check("stall_req on opcode", stall_req);
      check("request fields", mreq.valid && mreq.addr == a + ctrl.imm &&
            mreq.we == (ctrl.op == OP_ST) && (ctrl.op == OP_LD || mreq.wdata == b));
      lat = $urandom % 5;
      waited = 0;
      repeat (lat) begin
        @(negedge clk);
        waited++;
        check("request held", mreq.valid && stall_req);
      end
      rdata = $urandom;
      mrsp.valid = 1; mrsp.rdata = rdata;
      n_req++;
      @(negedge clk);
      mrsp = '0;
      check("stall released in retire cycle", !stall_req && !mreq.valid);
      check("y unchanged before retire edge", y == prev_y);
      if (n % 4 == 0) begin
        // another unit keeps the array stalled: no second request
        ext_stall = 1;
        repeat (3) begin
          @(negedge clk);
          check("no re-issue while stalled", !mreq.valid);
        end
        ext_stall = 0;
      end
      @(posedge clk);
      #1;
      if (ctrl.op == OP_LD) check("load data after retire", y == rdata);
      else check("store leaves y", y == prev_y);
      prev_y = y;
      ctrl = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
