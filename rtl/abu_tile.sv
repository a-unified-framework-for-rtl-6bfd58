// abu_tile -- branch unit holding the array's program counter.
//
// The paper only names this tile (ABU).  In this design it owns the program
// counter shared by all instruction-decode tiles: after start the PC counts
// up by one every cycle that the array is not stalled; OP_JMP loads imm,
// OP_BNZ / OP_BZ load imm when operand a is non-zero / zero, and OP_HALT
// stops fetching and raises halted.
//
// Timing: an instruction fetched at PC p reaches the tiles two cycles later
// (instruction memory read, then ID register), so a branch takes effect
// after two delay-slot instructions, which always execute.  start has
// priority over everything and restarts from PC 0.
module abu_tile
  import rblk_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  ctrl_t             ctrl,
  input  logic [DATA_W-1:0] a,
  input  logic              start,
  input  logic              stall,
  output logic [PC_W-1:0]   pc,
  output logic              running,
  output logic              halted,
  output logic              taken     // pulse: a branch changed the PC
);

  logic          do_op;
  logic          jump;
  logic [PC_W-1:0] target;

  always_comb begin
    do_op  = running && !stall && ctrl.valid;
    target = ctrl.imm[PC_W-1:0];
    jump   = 1'b0;
    if (do_op) begin
      unique case (ctrl.op)
        OP_JMP:  jump = 1'b1;
        OP_BNZ:  jump = (a != '0);
        OP_BZ:   jump = (a == '0);
        default: jump = 1'b0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc      <= '0;
      running <= 1'b0;
      halted  <= 1'b0;
      taken   <= 1'b0;
    end else if (start) begin
      pc      <= '0;
      running <= 1'b1;
      halted  <= 1'b0;
      taken   <= 1'b0;
    end else begin
      taken <= jump;
      if (do_op && ctrl.op == OP_HALT) begin
        running <= 1'b0;
        halted  <= 1'b1;
      end else if (running && !stall) begin
        pc <= jump ? target : pc + 1'b1;
      end
    end
  end

endmodule
