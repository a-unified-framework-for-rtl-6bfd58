// rblk_pkg -- types and constants shared by every tile of the approximate
// R-Blocks style CGRA.
//
// The array works on 32-bit data words (the paper's multiplier tiles take
// 32-bit operands).  Everything else in this package is this design's own
// choice, because the paper does not publish an instruction format:
//
//   * a 32-bit instruction word per instruction-decode (ID) tile and per cycle
//       [31:27] op   [26] use_imm   [25:21] rd   [20:16] rs   [15:0] imm16
//   * a decoded control word (ctrl_t) that an ID tile sends over the control
//     network to the tiles it drives; every tile reacts only to the opcodes
//     of its own class and treats the rest as no-operation,
//   * the tile layout of the array, copied from the architecture overview
//     figure (6 x 6 grid, see tile_at()),
//   * a one-outstanding memory request bundle between load/store units and
//     the arbiter, and an AXI4-Lite bundle for the two system ports.
package rblk_pkg;

  localparam int unsigned DATA_W = 32;   // operand / result width
  localparam int unsigned INSTR_W = 32;  // instruction word width
  localparam int unsigned PC_W = 8;      // instruction memory address width

  // Opcodes.  Grouped by the tile class that executes them.
  typedef enum logic [4:0] {
    OP_NOP  = 5'd0,
    // ALU tile
    OP_ADD  = 5'd1,
    OP_SUB  = 5'd2,
    OP_AND  = 5'd3,
    OP_OR   = 5'd4,
    OP_XOR  = 5'd5,
    OP_SHL  = 5'd6,
    OP_SHR  = 5'd7,
    OP_SRA  = 5'd8,
    OP_SLT  = 5'd9,
    OP_MOVA = 5'd10,
    OP_MOVB = 5'd11,
    OP_ACC  = 5'd12,
    // multiplier tiles (accurate and approximate alike)
    OP_MUL  = 5'd16,
    // local memory and load/store unit tiles
    OP_LD   = 5'd20,
    OP_ST   = 5'd21,
    // register file tile
    OP_RFW  = 5'd24,
    OP_RFR  = 5'd25,
    OP_RFWR = 5'd26,
    // branch unit (ABU) tile
    OP_JMP  = 5'd28,
    OP_BNZ  = 5'd29,
    OP_BZ   = 5'd30,
    OP_HALT = 5'd31
  } op_e;

  // Decoded control word carried by the control network.
  typedef struct packed {
    logic              valid;
    op_e               op;
    logic              use_imm;
    logic [4:0]        rd;
    logic [4:0]        rs;
    logic [DATA_W-1:0] imm;
  } ctrl_t;

  localparam int unsigned CTRL_W = $bits(ctrl_t);

  // Second operand of an arithmetic tile: the immediate or the B input.
  function automatic logic [DATA_W-1:0] operand_b(ctrl_t c, logic [DATA_W-1:0] b);
    return c.use_imm ? c.imm : b;
  endfunction

  // Pack one instruction word (used by program generators in testbenches).
  function automatic logic [INSTR_W-1:0] mk_instr(op_e op, logic use_imm,
                                                  logic [4:0] rd, logic [4:0] rs,
                                                  logic [15:0] imm);
    return {op, use_imm, rd, rs, imm};
  endfunction

  // Load/store unit <-> arbiter: one outstanding word access.  The request
  // stays valid until the one-cycle response pulse has been seen.
  typedef struct packed {
    logic              valid;
    logic              we;
    logic [DATA_W-1:0] addr;   // word address
    logic [DATA_W-1:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic              valid;
    logic [DATA_W-1:0] rdata;
  } mem_rsp_t;

  // AXI4-Lite, manager-to-subordinate and subordinate-to-manager halves.
  typedef struct packed {
    logic        awvalid;
    logic [31:0] awaddr;
    logic        wvalid;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
    logic        bready;
    logic        arvalid;
    logic [31:0] araddr;
    logic        rready;
  } axil_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    logic        bvalid;
    logic [1:0]  bresp;
    logic        arready;
    logic        rvalid;
    logic [31:0] rdata;
    logic [1:0]  rresp;
  } axil_rsp_t;

  // Switchbox configuration write (program loader -> one network).
  typedef struct packed {
    logic       we;
    logic [7:0] sb;    // switchbox index, row * COLS + col
    logic [5:0] idx;   // field inside the switchbox
    logic [7:0] data;  // selector value
  } cfg_wr_t;

  // Array layout, copied from the architecture overview figure.
  localparam int unsigned ROWS = 6;
  localparam int unsigned COLS = 6;

  typedef enum logic [3:0] {
    T_NONE, T_LM, T_ID, T_ALU, T_RF, T_MUL, T_AXMUL, T_LSU, T_ABU
  } tile_e;

  function automatic tile_e tile_at(int r, int c);
    case (r)
      0, 5: return T_LM;
      1: return (c == 0 || c == 3) ? T_ID : T_ALU;
      2: return (c == 0 || c == 3) ? T_ID : T_RF;
      3: return (c == 0 || c == 3) ? T_ID : ((c < 3) ? T_AXMUL : T_MUL);
      4: case (c)
           0: return T_LSU;
           1: return T_ID;
           2: return T_ABU;
           3: return T_ID;
           4: return T_ALU;
           default: return T_MUL;
         endcase
      default: return T_NONE;
    endcase
  endfunction

  // Number of tiles of a kind that come before (r, c) in row-major order.
  function automatic int unsigned kind_index(tile_e k, int r, int c);
    int unsigned n = 0;
    for (int i = 0; i < r * int'(COLS) + c; i++)
      if (tile_at(i / COLS, i % COLS) == k) n++;
    return n;
  endfunction

  function automatic int unsigned kind_count(tile_e k);
    return kind_index(k, ROWS, 0);
  endfunction

  // ---------------------------------------------------------------------
  // Wilton switchbox track permutation.  Sides are 0 north, 1 east, 2 south,
  // 3 west; n is the number of tracks per side.  Track t on side `from`
  // connects to track wilton_track(from, to, t, n) on side `to`.  Straight
  // through keeps the track number, each turn shifts it by a different
  // amount, so that a net that turns keeps reaching new tracks (the pattern
  // of Wilton's switch box as used in common FPGA routing tools).  Every
  // turn is the inverse of the opposite turn:
  // wilton_track(to, from, wilton_track(from, to, t, n), n) == t.
  // ---------------------------------------------------------------------
  function automatic int unsigned wilton_track(int unsigned from, int unsigned to,
                                               int unsigned t, int unsigned n);
    int unsigned r;
    r = t;
    unique case (from * 4 + to)
      3 * 4 + 0, 0 * 4 + 3: r = (n - t) % n;          // west <-> north
      3 * 4 + 2:            r = (n + t - 1) % n;      // west  -> south
      2 * 4 + 3:            r = (t + 1) % n;          // south -> west
      1 * 4 + 0:            r = (n + t - 1) % n;      // east  -> north
      0 * 4 + 1:            r = (t + 1) % n;          // north -> east
      1 * 4 + 2, 2 * 4 + 1: r = (2 * n - 2 - t) % n;  // east <-> south
      default:              r = t;                    // straight through
    endcase
    return r;
  endfunction

endpackage
