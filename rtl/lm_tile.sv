// lm_tile -- local data memory tile.
//
// One of the local SRAM memories placed inside the array so that operands
// are fetched next to the functional units.  OP_LD reads word (a + imm) onto
// y; OP_ST writes operand b into word (a + imm).  The paper builds these
// from SRAM macros of unstated size; here the memory is a synchronous-read
// array of DEPTH 32-bit words (default 512, this design's choice) and the
// address wraps modulo DEPTH.
//
// Timing: a load presented with stall low returns its word on y after the
// next clock edge; y holds otherwise.  Memory contents are not reset.
module lm_tile
  import rblk_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  input  ctrl_t             ctrl,
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  input  logic              stall,
  output logic [DATA_W-1:0] y
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [DATA_W-1:0] mem [DEPTH];
  logic [DATA_W-1:0] full_addr;
  logic [AW-1:0]     addr;
  logic              do_ld, do_st;

  always_comb begin
    full_addr = a + ctrl.imm;
    addr      = full_addr[AW-1:0];
    do_ld     = !stall && ctrl.valid && ctrl.op == OP_LD;
    do_st     = !stall && ctrl.valid && ctrl.op == OP_ST;
  end

  always_ff @(posedge clk) begin
    if (do_st) mem[addr] <= b;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      y <= '0;
    else if (do_ld)
      y <= mem[addr];
  end

endmodule
