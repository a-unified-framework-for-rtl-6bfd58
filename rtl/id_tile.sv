// id_tile -- instruction-decode tile.
//
// Each ID tile receives, every cycle, the instruction word of its own bank of
// the instruction memory, decodes it and drives the resulting control word
// onto the control network.  The network carries that word to every tile the
// ID has been routed to: one tile gives scalar (SISD) operation, several
// tiles driven by the same ID execute the same operation in the same cycle
// (SIMD, a vector lane per tile).
//
// Decoding (own format, see rblk_pkg): opcode, immediate flag, rd and rs
// fields are split out, the 16-bit immediate is sign-extended to 32 bits and
// the word is marked valid unless it is a no-operation.  An opcode outside
// the defined set is decoded as a no-operation.
//
// Timing: the control word is registered; it is held while stall is high and
// is a no-operation after reset.
module id_tile
  import rblk_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [INSTR_W-1:0] instr,
  input  logic               stall,
  output ctrl_t              ctrl
);

  ctrl_t dec;
  op_e   op;

  always_comb begin
    op = op_e'(instr[31:27]);
    unique case (op)
      OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_SHL, OP_SHR, OP_SRA, OP_SLT,
      OP_MOVA, OP_MOVB, OP_ACC, OP_MUL, OP_LD, OP_ST, OP_RFW, OP_RFR, OP_RFWR,
      OP_JMP, OP_BNZ, OP_BZ, OP_HALT: dec.valid = 1'b1;
      default: dec.valid = 1'b0;
    endcase
    dec.op      = dec.valid ? op : OP_NOP;
    dec.use_imm = instr[26];
    dec.rd      = instr[25:21];
    dec.rs      = instr[20:16];
    dec.imm     = {{(DATA_W-16){instr[15]}}, instr[15:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      ctrl <= '0;
    else if (!stall)
      ctrl <= dec;
  end

endmodule
