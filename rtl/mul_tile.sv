// mul_tile -- multiplier functional-unit tile, accurate or approximate.
//
// With APPROX = 0 this is the accurate 32 x 32 multiplier tile (MUL in the
// array); with APPROX = 1 it is the approximate tile (Ax MUL) built around a
// DRUMk multiplier.  As in the paper, both variants execute the same
// micro-instruction (OP_MUL) with the same operand format and the same
// delay, so a compiler can move an operation between them without any other
// change.  Which output channels go to which variant is decided in software.
//
// Interface: control word from the control network, operands a and b from
// the data network (b is replaced by the immediate when ctrl.use_imm is set).
// Timing: the product (low 32 bits) is registered; it appears on y one cycle
// after the cycle in which OP_MUL is presented with stall low.  y holds its
// value otherwise.  Result width and registering are this design's choice.
module mul_tile
  import rblk_pkg::*;
#(
  parameter bit          APPROX = 1'b0,
  parameter int unsigned K      = 7
) (
  input  logic              clk,
  input  logic              rst_n,
  input  ctrl_t             ctrl,
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  input  logic              stall,
  output logic [DATA_W-1:0] y
);

  logic [DATA_W-1:0]   opb;
  logic [2*DATA_W-1:0] prod;

  assign opb = operand_b(ctrl, b);

  if (APPROX) begin : g_drum
    drum_mul #(.N(DATA_W), .K(K)) u_drum (.a(a), .b(opb), .p(prod));
  end else begin : g_exact
    assign prod = (2*DATA_W)'(signed'(a)) * (2*DATA_W)'(signed'(opb));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      y <= '0;
    else if (!stall && ctrl.valid && ctrl.op == OP_MUL)
      y <= prod[DATA_W-1:0];
  end

endmodule
