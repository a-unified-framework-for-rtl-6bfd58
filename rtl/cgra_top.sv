// cgra_top -- approximate R-Blocks style CGRA core.
//
// A 6 x 6 grid of heterogeneous tiles (layout from rblk_pkg::tile_at, copied
// from the paper's architecture overview): two rows of local memories (LM)
// framing eight instruction-decode tiles (ID), five ALUs, four register
// files (RF), three accurate 32 x 32 multipliers (MUL), two approximate DRUM
// multipliers (Ax MUL), one load/store unit (LSU) and one branch unit (ABU).
// Two programmable 2D meshes of switchboxes connect them: a 32-bit data
// network between tile outputs and operand inputs, and a control network
// that carries each ID's decoded control word to the tiles it drives.  An ID
// routed to several tiles drives them as SIMD lanes.
//
// The host programs the core through the AXI4-Lite subordinate port
// (program loader: instruction memory, switchbox patterns, start/status).
// The LSU reaches external memory through the arbiter and the AXI4-Lite
// manager port.  All tiles share one clock and one global stall, raised
// while the LSU waits for memory.
//
// Pipeline: PC (ABU) -> instruction memory (registered read, one bank per
// ID) -> ID (registered decode) -> tiles execute and register their result.
// A result is visible to any other tile through the data network in the
// next cycle.  Branches have two delay slots.
//
// Own choices: instruction format, operation set, network track count and
// switchbox pattern, memory sizes, stall scheme and address maps; the paper
// describes the tiles and networks but not these details.  The two supply
// voltage domains of the paper are a physical property and are not part of
// this RTL.  The combinational loop reported through the network meshes is
// structural and is explained in switchbox.
module cgra_top
  import rblk_pkg::*;
#(
  parameter int unsigned TRACKS   = 4,    // tracks per mesh direction
  parameter int unsigned IM_DEPTH = 256,  // instructions per ID bank
  parameter int unsigned LM_DEPTH = 512,  // words per local memory
  parameter int unsigned RF_DEPTH = 16,   // registers per register file
  parameter int unsigned DRUM_K   = 7     // DRUMk of the approximate tiles
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_axi_req,   // host -> program loader
  output axil_rsp_t s_axi_rsp,
  output axil_req_t m_axi_req,   // arbiter -> external memory
  input  axil_rsp_t m_axi_rsp,
  output logic      done,        // array halted
  output logic      busy,        // array running
  output logic      stall,       // array stalled by the LSU
  output logic      branch       // pulse: a branch of the ABU was taken
);

  localparam int unsigned NT     = ROWS * COLS;
  localparam int unsigned N_ID   = kind_count(T_ID);
  localparam int unsigned N_LSU  = kind_count(T_LSU);
  localparam int unsigned IM_AW  = $clog2(IM_DEPTH);

  // Networks.
  logic [DATA_W-1:0] d_out [NT];
  logic [DATA_W-1:0] d_in  [NT][2];
  logic [CTRL_W-1:0] c_out [NT];
  logic [CTRL_W-1:0] c_in  [NT][1];
  cfg_wr_t           dcfg, ccfg;

  // Program loader / instruction memory.
  logic                      im_we;
  logic [$clog2(N_ID)-1:0]   im_bank;
  logic [IM_AW-1:0]          im_addr;
  logic [INSTR_W-1:0]        im_wdata;
  logic [INSTR_W-1:0]        im_rdata [N_ID];
  logic                      start, running, halted;
  logic [PC_W-1:0]           pc;
  logic                      taken;

  // Memory path.
  mem_req_t lsu_req   [N_LSU];
  mem_rsp_t lsu_rsp   [N_LSU];
  logic     lsu_stall [N_LSU];

  always_comb begin
    stall = 1'b0;
    for (int i = 0; i < int'(N_LSU); i++) stall |= lsu_stall[i];
  end

  assign done = halted;
  assign busy = running;
  assign branch = taken;

  program_loader #(.N_BANK(N_ID), .IM_DEPTH(IM_DEPTH)) u_loader (
    .clk, .rst_n,
    .s_req    (s_axi_req),
    .s_rsp    (s_axi_rsp),
    .im_we, .im_bank, .im_addr, .im_wdata,
    .dcfg, .ccfg,
    .start, .running, .halted
  );

  instr_mem #(.N_BANK(N_ID), .DEPTH(IM_DEPTH)) u_imem (
    .clk, .rst_n,
    .we    (im_we),
    .wbank (im_bank),
    .waddr (im_addr),
    .wdata (im_wdata),
    .en    (!stall),
    .clear (!running),
    .raddr (IM_AW'(pc)),
    .rdata (im_rdata)
  );

  arbiter #(.N_REQ(N_LSU)) u_arb (
    .clk, .rst_n,
    .req   (lsu_req),
    .rsp   (lsu_rsp),
    .m_req (m_axi_req),
    .m_rsp (m_axi_rsp)
  );

  noc_mesh #(.R(ROWS), .C(COLS), .W(DATA_W), .TRACKS(TRACKS), .N_TIN(2)) u_data_noc (
    .clk, .rst_n, .cfg(dcfg), .tile_out(d_out), .tile_in(d_in)
  );

  noc_mesh #(.R(ROWS), .C(COLS), .W(CTRL_W), .TRACKS(TRACKS), .N_TIN(1)) u_ctrl_noc (
    .clk, .rst_n, .cfg(ccfg), .tile_out(c_out), .tile_in(c_in)
  );

  for (genvar r = 0; r < int'(ROWS); r++) begin : g_row
    for (genvar c = 0; c < int'(COLS); c++) begin : g_col
      localparam int unsigned I = r * COLS + c;
      localparam tile_e       KIND = tile_at(r, c);
      if (KIND == T_ID) begin : g_id
        localparam int unsigned B = kind_index(T_ID, r, c);
        ctrl_t cw;
        id_tile u_id (.clk, .rst_n, .instr(im_rdata[B]), .stall, .ctrl(cw));
        assign c_out[I] = CTRL_W'(cw);
        assign d_out[I] = '0;
      end else begin : g_fu
        ctrl_t ctrl;
        assign ctrl     = ctrl_t'(c_in[I][0]);
        assign c_out[I] = '0;
        if (KIND == T_LM) begin : g_lm
          lm_tile #(.DEPTH(LM_DEPTH)) u_lm (
            .clk, .rst_n, .ctrl, .a(d_in[I][0]), .b(d_in[I][1]), .stall, .y(d_out[I]));
        end else if (KIND == T_ALU) begin : g_alu
          alu_tile u_alu (
            .clk, .rst_n, .ctrl, .a(d_in[I][0]), .b(d_in[I][1]), .stall, .y(d_out[I]));
        end else if (KIND == T_RF) begin : g_rf
          rf_tile #(.DEPTH(RF_DEPTH)) u_rf (
            .clk, .rst_n, .ctrl, .a(d_in[I][0]), .stall, .y(d_out[I]));
        end else if (KIND == T_MUL || KIND == T_AXMUL) begin : g_mul
          mul_tile #(.APPROX(KIND == T_AXMUL), .K(DRUM_K)) u_mul (
            .clk, .rst_n, .ctrl, .a(d_in[I][0]), .b(d_in[I][1]), .stall, .y(d_out[I]));
        end else if (KIND == T_LSU) begin : g_lsu
          localparam int unsigned L = kind_index(T_LSU, r, c);
          lsu_tile u_lsu (
            .clk, .rst_n, .ctrl, .a(d_in[I][0]), .b(d_in[I][1]), .stall,
            .stall_req (lsu_stall[L]),
            .mreq      (lsu_req[L]),
            .mrsp      (lsu_rsp[L]),
            .y         (d_out[I]));
        end else if (KIND == T_ABU) begin : g_abu
          abu_tile u_abu (
            .clk, .rst_n, .ctrl, .a(d_in[I][0]), .start, .stall,
            .pc, .running, .halted, .taken);
          assign d_out[I] = '0;
        end else begin : g_empty
          assign d_out[I] = '0;
        end
      end
    end
  end

endmodule
