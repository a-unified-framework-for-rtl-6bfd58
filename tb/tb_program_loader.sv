// tb_program_loader -- self-checking test of the program loader through its
// AXI4-Lite port: instruction-memory writes (bank, word, data), data- and
// control-network configuration writes (switchbox, field, value), the start
// pulse, the status register, and that each write produces exactly one
// side effect.
module tb_program_loader;
  import rblk_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_req_t s_req;
  axil_rsp_t s_rsp;
  logic im_we;
  logic [2:0] im_bank;
  logic [7:0] im_addr;
  logic [31:0] im_wdata;
  cfg_wr_t dcfg, ccfg;
  logic start, running, halted;

  axil_host u_host (.clk, .req(s_req), .rsp(s_rsp));
  program_loader #(.N_BANK(8), .IM_DEPTH(256)) u_dut (.clk, .rst_n, .s_req, .s_rsp,
    .im_we, .im_bank, .im_addr, .im_wdata, .dcfg, .ccfg, .start, .running, .halted);

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
      $display("FAIL %s", what);
    end
  endtask

  // Record side effects.
  int n_im = 0, n_d = 0, n_c = 0, n_start = 0;
  logic [2:0] l_bank; logic [7:0] l_addr; logic [31:0] l_data;
  cfg_wr_t l_cfg;
  always @(posedge clk) begin
    if (im_we) begin n_im++; l_bank = im_bank; l_addr = im_addr; l_data = im_wdata; end
    if (dcfg.we) begin n_d++; l_cfg = dcfg; end
    if (ccfg.we) begin n_c++; l_cfg = ccfg; end
    if (start) n_start++;
  end

  logic [31:0] rd, d;
  int bk, w, sb, f, e_im, e_d, e_c;
  initial begin
    running = 0; halted = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    e_im = 0; e_d = 0; e_c = 0;
    for (int n = 0; n < 300; n++) begin
      d = $urandom;
      case ($urandom % 3)
        0: begin
          bk = $urandom % 8; w = $urandom % 256;
          u_host.write(32'h1_0000 | (bk << 10) | (w << 2), d);
          e_im++;
          check("im write", n_im == e_im && l_bank == 3'(bk) && l_addr == 8'(w) && l_data == d);
        end
        1: begin
          sb = $urandom % 36; f = $urandom % 18;
          u_host.write(32'h2_0000 | (sb << 8) | (f << 2), d);
          e_d++;
          check("data cfg write", n_d == e_d && n_c == e_c && l_cfg.sb == 8'(sb) &&
                l_cfg.idx == 6'(f) && l_cfg.data == d[7:0]);
        end
        default: begin
          sb = $urandom % 36; f = $urandom % 17;
          u_host.write(32'h3_0000 | (sb << 8) | (f << 2), d);
          e_c++;
          check("ctrl cfg write", n_c == e_c && n_d == e_d && l_cfg.sb == 8'(sb) &&
                l_cfg.idx == 6'(f) && l_cfg.data == d[7:0]);
        end
      endcase
    end
    check("no start yet", n_start == 0);
    u_host.write(32'h0, 32'h1);
    check("one start pulse", n_start == 1);
    u_host.write(32'h0, 32'h0);
    check("start bit 0 ignored", n_start == 1);
    running = 1; halted = 0;
    u_host.read(32'h0, rd);
    check("status running", rd == 32'h1);
    running = 0; halted = 1;
    u_host.read(32'h0, rd);
    check("status halted", rd == 32'h2);
    u_host.read(32'h1_0000, rd);
    check("other reads zero", rd == 0);
    check("side-effect totals", n_im == e_im && n_d == e_d && n_c == e_c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
