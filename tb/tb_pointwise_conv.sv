// tb_pointwise_conv -- workload test: a slice of a MobileNetV2 pointwise
// (1x1) convolution with per-output-channel accurate/approximate mapping,
// swept over the importance quantiles 0, 0.125, 0.25, 0.5, 0.75, 0.875, 1.
//
// The layer slice has CI = 8 input channels and CO = 8 output channels at
// one pixel.  Activations are unsigned 8-bit (quantised ReLU6 outputs) and
// weights signed 8-bit.  An importance value is given to every output
// channel (here the L1 norm of its weights, a stand-in for the importance
// factors a training framework would compute).  At quantile q the
// round(q * CO) least important channels are mapped to the approximate
// (DRUM7) multiplier and the rest to the accurate one.  q = 0 is all
// accurate, q = 1 all approximate.
//
// The core runs the channels in passes.  In each pass one accurate channel
// runs on a MUL tile and one approximate channel on an Ax MUL tile, in the
// same cycles: one ID drives both multipliers (SIMD).  The number of passes
// is max(accurate, approximate), so an even split needs the fewest cycles.
// For each quantile the testbench generates the program and rewrites the
// instruction memory through the host port.  It then restarts the core, and
// checks:
//   * every output channel: the exact dot product if it was mapped to the
//     accurate unit, an independent DRUM7 model if to the approximate one;
//   * the number of external reads and writes, and of SIMD multiply slots;
//   * output RMSE against the exact layer (0 at q = 0, growing with q);
//   * the cycle count is lowest at the even split (q = 0.5).
// Tiles, routes and the instruction format are those of tb_cgra_top.
module tb_pointwise_conv;
  import rblk_pkg::*;
  import noc_router_pkg::*;
  localparam int CI = 8, CO = 8;
  localparam int XB = 0, WAB = 64, WXB = 128, OB = 192;  // external word addresses
  localparam int T = 4;
  localparam int NQ = 7;
  real quantile [NQ] = '{0.0, 0.125, 0.25, 0.5, 0.75, 0.875, 1.0};
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_req_t s_req, m_req;
  axil_rsp_t s_rsp, m_rsp;
  logic done, busy, stall, branch;
  int n_reads, n_writes;

  cgra_top u_dut (.clk, .rst_n, .s_axi_req(s_req), .s_axi_rsp(s_rsp),
                  .m_axi_req(m_req), .m_axi_rsp(m_rsp), .done, .busy, .stall, .branch);
  axil_host u_host (.clk, .req(s_req), .rsp(s_rsp));
  axil_mem_model #(.DEPTH(256), .MAX_WAIT(2)) u_mem (.clk, .req(m_req), .rsp(m_rsp), .n_reads, .n_writes);

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
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

  // Tile positions (row * 6 + col) and ID banks, as in tb_cgra_top.
  localparam int ACC_AX = 1*6+1, MOVER = 1*6+2, CNT = 1*6+4, ACC_EX = 4*6+4;
  localparam int RF = 2*6+2, AXM = 3*6+1, MUL = 3*6+4, LSU = 4*6+0, ABU = 4*6+2;
  localparam int LMX = 5*6+1, LMW0 = 5*6+2, LMW1 = 5*6+3;
  int id_pos [8] = '{1*6+0, 1*6+3, 2*6+0, 2*6+3, 3*6+0, 3*6+3, 4*6+1, 4*6+3};
  localparam int B_ACC = 0, B_LSU = 1, B_MUL = 2, B_LMX = 3, B_LMW0 = 4, B_LMW1 = 5,
                 B_ABU = 6, B_MISC = 7;

  logic [31:0] prog [256][8];
  int npc;

  Router dr, cr;
  task automatic droute(int s, int d, int p);
    check($sformatf("data route %0d->%0d.%0d", s, d, p), dr.route(s / COLS, s % COLS, d / COLS, d % COLS, p));
  endtask
  task automatic croute(int bank, int d);
    int s = id_pos[bank];
    check($sformatf("ctrl route %0d->%0d", s, d), cr.route(s / COLS, s % COLS, d / COLS, d % COLS, 0));
  endtask

  function automatic logic [31:0] I(op_e op, int imm = 0, bit ui = 0, int rd = 0, int rs = 0);
    return mk_instr(op, ui, 5'(rd), 5'(rs), 16'(imm));
  endfunction

  int n_stall_cyc = 0, n_branch = 0, n_simd_mul = 0, cycles = 0;
  always @(posedge clk) if (busy) begin
    cycles++;
    if (stall) n_stall_cyc++;
    if (branch) n_branch++;
    if (!stall && u_dut.g_row[3].g_col[1].g_fu.ctrl.op == OP_MUL &&
        u_dut.g_row[3].g_col[4].g_fu.ctrl.op == OP_MUL) n_simd_mul++;
  end

  // Layer data
  int x [CI];
  int w [CO][CI];
  int imp [CO];
  int order [CO];              // channels by rising importance
  bit is_ax [CO];
  int acc_list [$], ax_list [$];
  longint exact [CO], expect_out [CO];
  int out_addr [CO];
  int run_cycles [NQ];
  real rmse [NQ];

  // Streaming list for phase 1: (external address, LM bank, LM address)
  int s_ext [$], s_bank [$], s_lm [$];

  int pc, loop_pc, n_ax, passes, ch, r0, w0, n0, st_i;
  logic [31:0] st;
  real se;

  initial begin
    // ---------------- layer ----------------
    for (int i = 0; i < CI; i++) x[i] = int'($urandom % 256);
    x[0] = 255;
    for (int o = 0; o < CO; o++) begin
      imp[o] = 0;
      exact[o] = 0;
      for (int i = 0; i < CI; i++) begin
        w[o][i] = int'($urandom % 255) - 127;
        imp[o] += (w[o][i] < 0) ? -w[o][i] : w[o][i];
        exact[o] += longint'(x[i]) * longint'(w[o][i]);
      end
      order[o] = o;
    end
    for (int a = 0; a < CO; a++)            // sort by importance (insertion sort)
      for (int b = a; b > 0 && imp[order[b]] < imp[order[b - 1]]; b--) begin
        ch = order[b]; order[b] = order[b - 1]; order[b - 1] = ch;
      end

    // ---------------- routes (same for every run) ----------------
    dr = new(ROWS, COLS, T);
    cr = new(ROWS, COLS, T);
    droute(LSU, LMX, 1); droute(LSU, LMW0, 1); droute(LSU, LMW1, 1);
    droute(CNT, LMX, 0); droute(CNT, LMW0, 0); droute(CNT, LMW1, 0);
    droute(CNT, CNT, 0); droute(CNT, ABU, 0);
    droute(LMX, MUL, 0); droute(LMX, AXM, 0);
    droute(LMW0, MUL, 1); droute(LMW1, AXM, 1);
    droute(MUL, ACC_EX, 0); droute(AXM, ACC_AX, 0);
    droute(ACC_AX, MOVER, 0); droute(ACC_EX, MOVER, 1);
    droute(MOVER, RF, 0); droute(RF, LSU, 1);
    croute(B_ACC, ACC_AX); croute(B_ACC, ACC_EX);
    croute(B_LSU, LSU);
    croute(B_MUL, MUL); croute(B_MUL, AXM);
    croute(B_LMX, LMX); croute(B_LMW0, LMW0); croute(B_LMW1, LMW1);
    croute(B_ABU, ABU);
    croute(B_MISC, CNT); croute(B_MISC, MOVER); croute(B_MISC, RF);

    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (dr.words[i])
      u_host.write(32'h2_0000 | (dr.words[i].sb << 8) | (dr.words[i].idx << 2), 32'(dr.words[i].data));
    foreach (cr.words[i])
      u_host.write(32'h3_0000 | (cr.words[i].sb << 8) | (cr.words[i].idx << 2), 32'(cr.words[i].data));

    for (int q = 0; q < NQ; q++) begin
      // ---------------- mapping ----------------
      n_ax = int'(quantile[q] * CO);          // rounds to nearest
      acc_list.delete(); ax_list.delete();
      foreach (order[k]) begin
        is_ax[order[k]] = (k < n_ax);
        if (k < n_ax) ax_list.push_back(order[k]);
        else acc_list.push_back(order[k]);
      end
      passes = (acc_list.size() > ax_list.size()) ? acc_list.size() : ax_list.size();

      // external memory image: x, then per pass one accurate and one
      // approximate weight vector (zeros where a slot is unused)
      for (int a = 0; a < 256; a++) u_mem.mem[a] = 32'hDEAD_0000 | 32'(a);
      for (int i = 0; i < CI; i++) u_mem.mem[XB + i] = 32'(x[i]);
      foreach (out_addr[o]) out_addr[o] = -1;
      for (int p = 0; p < passes; p++)
        for (int i = 0; i < CI; i++) begin
          u_mem.mem[WAB + p * CI + i] = (p < acc_list.size()) ? 32'(w[acc_list[p]][i]) : 32'h0;
          u_mem.mem[WXB + p * CI + i] = (p < ax_list.size()) ? 32'(w[ax_list[p]][i]) : 32'h0;
        end
      for (int p = 0; p < passes; p++) begin
        if (p < ax_list.size()) out_addr[ax_list[p]] = OB + 2 * p;
        if (p < acc_list.size()) out_addr[acc_list[p]] = OB + 2 * p + 1;
      end
      foreach (expect_out[o]) begin
        expect_out[o] = 0;
        for (int i = 0; i < CI; i++)
          expect_out[o] += is_ax[o] ? ref_drum(x[i], w[o][i], 7) : longint'(x[i]) * longint'(w[o][i]);
      end

      // ---------------- program ----------------
      foreach (prog[a, b]) prog[a][b] = 0;
      s_ext.delete(); s_bank.delete(); s_lm.delete();
      for (int i = 0; i < CI; i++) begin
        s_ext.push_back(XB + i); s_bank.push_back(B_LMX); s_lm.push_back(i);
      end
      for (int p = 0; p < passes; p++)
        for (int i = 0; i < CI; i++) begin
          s_ext.push_back(WAB + p * CI + i); s_bank.push_back(B_LMW0); s_lm.push_back(p * CI + i);
          s_ext.push_back(WXB + p * CI + i); s_bank.push_back(B_LMW1); s_lm.push_back(p * CI + i);
        end
      // phase 1: LSU load of item j and LM store of item j-1 share a slot
      prog[0][B_MISC] = I(OP_MOVB, 0, 1);
      for (int j = 0; j <= s_ext.size(); j++) begin
        pc = 1 + j;
        if (j < s_ext.size()) prog[pc][B_LSU] = I(OP_LD, s_ext[j]);
        if (j > 0) prog[pc][s_bank[j - 1]] = I(OP_ST, s_lm[j - 1]);
      end
      pc = s_ext.size() + 2;
      // phase 2: one pass per accurate/approximate channel pair
      for (int p = 0; p < passes; p++) begin
        prog[pc][B_MISC] = I(OP_MOVB, CI, 1);                   // counter = CI
        prog[pc][B_ACC]  = I(OP_MOVB, 0, 1);                    // clear both sums
        pc++;
        loop_pc = pc;
        prog[pc][B_LMX]  = I(OP_LD, -1);
        prog[pc][B_LMW0] = I(OP_LD, p * CI - 1);
        prog[pc][B_LMW1] = I(OP_LD, p * CI - 1);
        prog[pc + 1][B_MUL]  = I(OP_MUL);
        prog[pc + 1][B_MISC] = I(OP_ADD, -1, 1);
        prog[pc + 2][B_ACC]  = I(OP_ACC);
        prog[pc + 2][B_ABU]  = I(OP_BNZ, loop_pc);
        pc += 5;                                                // two delay slots
        prog[pc][B_MISC]     = I(OP_MOVA);                      // mover = approximate sum
        prog[pc + 1][B_MISC] = I(OP_RFW, 0, 0, 0);
        prog[pc + 2][B_MISC] = I(OP_MOVB);                      // mover = accurate sum
        prog[pc + 3][B_MISC] = I(OP_RFW, 0, 0, 1);
        prog[pc + 4][B_MISC] = I(OP_RFR, 0, 0, 0, 0);
        prog[pc + 5][B_LSU]  = I(OP_ST, OB + 2 * p);
        prog[pc + 5][B_MISC] = I(OP_RFR, 0, 0, 0, 1);
        prog[pc + 6][B_LSU]  = I(OP_ST, OB + 2 * p + 1);
        pc += 7;
      end
      prog[pc][B_ABU] = I(OP_HALT);
      npc = pc + 3;
      check($sformatf("q=%0.3f program fits the instruction memory", quantile[q]), npc <= 256);

      for (int a = 0; a < npc; a++)
        for (int b = 0; b < 8; b++)
          u_host.write(32'h1_0000 | (b << 10) | (a << 2), prog[a][b]);

      // ---------------- run ----------------
      r0 = n_reads; w0 = n_writes; n0 = n_simd_mul;
      cycles = 0;
      u_host.write(32'h0, 32'h1);
      do u_host.read(32'h0, st); while (!st[1]);
      repeat (5) @(posedge clk);
      run_cycles[q] = cycles;

      // ---------------- results ----------------
      se = 0.0;
      for (int o = 0; o < CO; o++) begin
        st_i = int'(u_mem.mem[out_addr[o]]);
        check($sformatf("q=%0.3f channel %0d (%s)", quantile[q], o, is_ax[o] ? "approx" : "accurate"),
              out_addr[o] >= 0 && u_mem.mem[out_addr[o]] == 32'(expect_out[o]));
        se += real'(longint'(st_i) - exact[o]) * real'(longint'(st_i) - exact[o]);
      end
      rmse[q] = $sqrt(se / CO);
      check($sformatf("q=%0.3f external reads", quantile[q]), n_reads - r0 == CI + 2 * passes * CI);
      check($sformatf("q=%0.3f external writes", quantile[q]), n_writes - w0 == 2 * passes);
      check($sformatf("q=%0.3f SIMD multiply slots", quantile[q]), n_simd_mul - n0 == passes * CI);
      $display("quantile %0.3f: %0d approximate channels, %0d passes, %0d cycles, output RMSE %0.2f",
               quantile[q], n_ax, passes, run_cycles[q], rmse[q]);
    end

    check("all accurate: RMSE 0", rmse[0] == 0.0);
    check("all approximate: RMSE above 0", rmse[NQ - 1] > 0.0);
    check("even split is fastest", run_cycles[3] < run_cycles[0] && run_cycles[3] < run_cycles[NQ - 1]);
    check("mechanism: LSU stall", n_stall_cyc > 0);
    check("mechanism: branch", n_branch > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
