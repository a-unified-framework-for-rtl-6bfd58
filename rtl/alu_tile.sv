// alu_tile -- arithmetic/logic functional-unit tile.
//
// The paper names the ALU tiles and labels them "add/shift"; the full
// operation set below is this design's own: add, subtract, and, or, xor,
// logical left/right shift, arithmetic right shift, signed set-less-than,
// move A, move B (or immediate), and accumulate (y <= y + a), the last so
// that a multiply-accumulate needs no feedback route through the network.
//
// Interface: control word from the control network, operands a and b from
// the data network (b is replaced by the immediate when ctrl.use_imm is set).
// Timing: one cycle; the result is registered on y and held while no ALU
// opcode is presented or while stall is high.
module alu_tile
  import rblk_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  ctrl_t             ctrl,
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  input  logic              stall,
  output logic [DATA_W-1:0] y
);

  logic [DATA_W-1:0] opb;
  logic [DATA_W-1:0] res;
  logic              hit;

  always_comb begin
    opb = operand_b(ctrl, b);
    hit = ctrl.valid;
    unique case (ctrl.op)
      OP_ADD:  res = a + opb;
      OP_SUB:  res = a - opb;
      OP_AND:  res = a & opb;
      OP_OR:   res = a | opb;
      OP_XOR:  res = a ^ opb;
      OP_SHL:  res = a << opb[4:0];
      OP_SHR:  res = a >> opb[4:0];
      OP_SRA:  res = DATA_W'($signed(a) >>> opb[4:0]);
      OP_SLT:  res = DATA_W'($signed(a) < $signed(opb));
      OP_MOVA: res = a;
      OP_MOVB: res = opb;
      OP_ACC:  res = y + a;
      default: begin
        res = y;
        hit = 1'b0;
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      y <= '0;
    else if (!stall && hit)
      y <= res;
  end

endmodule
