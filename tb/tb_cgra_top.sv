// tb_cgra_top -- end-to-end test of the whole array at its default size.
//
// The testbench plays host and external memory.  It routes both networks
// with the XY router, writes the switchbox patterns and a program for all
// eight ID banks through the AXI4-Lite subordinate port, starts the array
// and waits for it to halt.  The program computes two output channels of a
// small layer, as the paper's per-channel mapping would place them: channel
// 0 on an accurate multiplier, channel 1 on an approximate (DRUM7) one, both
// in the same cycles:
//
//   1. the LSU streams the input vector x and the weight vectors w0, w1 from
//      external memory into three local memories (load of item j+1 and
//      store of item j share one instruction slot);
//   2. a loop (counter ALU, ABU branch with two delay slots) reads x[i],
//      w0[i], w1[i] from the local memories, multiplies on the MUL and Ax MUL
//      tiles driven by one ID (SIMD), and accumulates on two ALUs driven by
//      another ID (SIMD);
//   3. the two sums pass through a move ALU and the register file and the
//      LSU writes them back to external memory; the ABU halts.
//
// Checked: both sums against sums computed here (exact products for channel
// 0, an independent DRUM7 model for channel 1), the number of external
// reads and writes, the number of taken branches, that each mechanism
// happened (LSU stall, taken branch, SIMD issue on both pairs, a product
// where the approximation differs from the exact one, program load, halt).
module tb_cgra_top;
  import rblk_pkg::*;
  import noc_router_pkg::*;
  localparam int L = 12;                       // vector length
  localparam int XB = 0, W0B = 64, W1B = 128, OB = 192;  // external word addresses
  localparam int T = 4;
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
    repeat (200000) @(posedge clk);
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

  // Tile positions (row, col) of the layout.
  function automatic int tid(int r, int c); return r * COLS + c; endfunction
  localparam int ACC_AX = 1*6+1, MOVER = 1*6+2, CNT = 1*6+4, ACC_EX = 4*6+4;
  localparam int RF = 2*6+2, AXM = 3*6+1, MUL = 3*6+4, LSU = 4*6+0, ABU = 4*6+2;
  localparam int LMX = 5*6+1, LMW0 = 5*6+2, LMW1 = 5*6+3;
  // ID tiles in bank order
  int id_pos [8] = '{1*6+0, 1*6+3, 2*6+0, 2*6+3, 3*6+0, 3*6+3, 4*6+1, 4*6+3};
  localparam int B_ACC = 0, B_LSU = 1, B_MUL = 2, B_LMX = 3, B_LMW0 = 4, B_LMW1 = 5,
                 B_ABU = 6, B_MISC = 7;

  // Program: prog[pc][bank]
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

  // Mechanism counters
  int n_stall_cyc = 0, n_branch = 0, n_simd_mul = 0, n_simd_acc = 0, n_approx_diff = 0;
  int n_prog_words = 0, cycles = 0;
  always @(posedge clk) if (busy) begin
    cycles++;
    if (stall) n_stall_cyc++;
    if (branch) n_branch++;
    if (!stall && u_dut.g_row[3].g_col[1].g_fu.ctrl.op == OP_MUL &&
        u_dut.g_row[3].g_col[4].g_fu.ctrl.op == OP_MUL) n_simd_mul++;
    if (!stall && u_dut.g_row[1].g_col[1].g_fu.ctrl.op == OP_ACC &&
        u_dut.g_row[4].g_col[4].g_fu.ctrl.op == OP_ACC) n_simd_acc++;
  end

  int x [L], w0 [L], w1 [L];
  longint sum_ex, sum_ax;
  int pc, loop_pc, k;
  logic [31:0] st;
  initial begin
    // ---------------- data ----------------
    sum_ex = 0; sum_ax = 0;
    for (int i = 0; i < L; i++) begin
      x[i]  = int'($urandom % 4001) - 2000;
      w0[i] = int'($urandom % 255) - 127;
      w1[i] = int'($urandom % 255) - 127;
      if (i == 0) x[i] = -128;
      u_mem.mem[XB + i]  = 32'(x[i]);
      u_mem.mem[W0B + i] = 32'(w0[i]);
      u_mem.mem[W1B + i] = 32'(w1[i]);
      sum_ex += longint'(x[i]) * longint'(w0[i]);
      sum_ax += ref_drum(x[i], w1[i], 7);
      if (ref_drum(x[i], w1[i], 7) != longint'(x[i]) * longint'(w1[i])) n_approx_diff++;
    end

    // ---------------- routes ----------------
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

    // ---------------- program ----------------
    foreach (prog[p, b]) prog[p][b] = 0;
    // phase 1: stream 3L words from external memory into the local memories
    prog[0][B_MISC] = I(OP_MOVB, 0, 1);                     // counter = 0
    for (int j = 0; j <= 3 * L; j++) begin
      pc = 1 + j;
      if (j < 3 * L)
        prog[pc][B_LSU] = I(OP_LD, (j % 3 == 0 ? XB : j % 3 == 1 ? W0B : W1B) + j / 3);
      if (j > 0) begin
        k = j - 1;
        prog[pc][k % 3 == 0 ? B_LMX : k % 3 == 1 ? B_LMW0 : B_LMW1] = I(OP_ST, k / 3);
      end
    end
    pc = 3 * L + 2;
    // phase 2: multiply-accumulate loop, counter = L .. 1, index = counter - 1
    prog[pc][B_MISC] = I(OP_MOVB, L, 1);
    pc++;
    loop_pc = pc;
    prog[pc][B_LMX] = I(OP_LD, -1); prog[pc][B_LMW0] = I(OP_LD, -1); prog[pc][B_LMW1] = I(OP_LD, -1);
    prog[pc + 1][B_MUL]  = I(OP_MUL);
    prog[pc + 1][B_MISC] = I(OP_ADD, -1, 1);                // counter -= 1
    prog[pc + 2][B_ACC]  = I(OP_ACC);
    prog[pc + 2][B_ABU]  = I(OP_BNZ, loop_pc);
    pc += 5;                                                // two delay slots
    // phase 3: write both sums back
    prog[pc][B_MISC]     = I(OP_MOVA);                      // mover = channel 1 (approximate)
    prog[pc + 1][B_MISC] = I(OP_RFW, 0, 0, 0);              // r0 = mover
    prog[pc + 2][B_MISC] = I(OP_MOVB);                      // mover = channel 0 (accurate)
    prog[pc + 3][B_MISC] = I(OP_RFW, 0, 0, 1);              // r1 = mover
    prog[pc + 4][B_MISC] = I(OP_RFR, 0, 0, 0, 0);           // y = r0
    prog[pc + 5][B_LSU]  = I(OP_ST, OB);
    prog[pc + 5][B_MISC] = I(OP_RFR, 0, 0, 0, 1);           // y = r1
    prog[pc + 6][B_LSU]  = I(OP_ST, OB + 1);
    prog[pc + 7][B_ABU]  = I(OP_HALT);
    npc = pc + 10;

    // ---------------- load through the host port ----------------
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (dr.words[i]) begin
      u_host.write(32'h2_0000 | (dr.words[i].sb << 8) | (dr.words[i].idx << 2), 32'(dr.words[i].data));
      n_prog_words++;
    end
    foreach (cr.words[i]) begin
      u_host.write(32'h3_0000 | (cr.words[i].sb << 8) | (cr.words[i].idx << 2), 32'(cr.words[i].data));
      n_prog_words++;
    end
    for (int p = 0; p < npc; p++)
      for (int b = 0; b < 8; b++) begin   // no-operations too: memory starts undefined
        u_host.write(32'h1_0000 | (b << 10) | (p << 2), prog[p][b]);
        n_prog_words++;
      end
    u_host.read(32'h0, st);
    check("idle before start", st == 0);
    u_host.write(32'h0, 32'h1);
    do u_host.read(32'h0, st); while (!st[1]);
    repeat (5) @(posedge clk);

    // ---------------- results ----------------
    $display("channel 0 (accurate): %0d expected %0d", signed'(u_mem.mem[OB + 1]), sum_ex);
    $display("channel 1 (approx.):  %0d expected %0d (exact would be different in %0d products)",
             signed'(u_mem.mem[OB]), sum_ax, n_approx_diff);
    check("accurate channel sum", u_mem.mem[OB + 1] == 32'(sum_ex));
    check("approximate channel sum", u_mem.mem[OB] == 32'(sum_ax));
    check("external reads", n_reads == 3 * L);
    check("external writes", n_writes == 2);
    check("taken branches = L-1", n_branch == L - 1);
    check("done and not running", done && !busy);
    $display("cycles=%0d stall_cycles=%0d branches=%0d simd_mul=%0d simd_acc=%0d approx_diff=%0d prog_words=%0d",
             cycles, n_stall_cyc, n_branch, n_simd_mul, n_simd_acc, n_approx_diff, n_prog_words);
    check("mechanism: LSU stall", n_stall_cyc > 0);
    check("mechanism: branch", n_branch > 0);
    check("mechanism: SIMD multiply (MUL + Ax MUL)", n_simd_mul == L);
    check("mechanism: SIMD accumulate", n_simd_acc == L);
    check("mechanism: approximation visible", n_approx_diff > 0);
    check("mechanism: program load", n_prog_words > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
