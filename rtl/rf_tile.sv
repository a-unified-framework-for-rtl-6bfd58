// rf_tile -- register-file tile.
//
// A small register file on the data network with one write port and one
// read port.  OP_RFW writes operand a into register rd, OP_RFR reads
// register rs onto y, OP_RFWR does both in the same cycle (the read returns
// the value from before the write).  The paper names the RF tiles only; the
// size (DEPTH registers, default 16), the port arrangement and the reset of
// all registers to zero are this design's choices.
//
// Timing: write and read take effect at the clock edge that ends the cycle
// in which the opcode is presented with stall low; y is registered.
module rf_tile
  import rblk_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  ctrl_t             ctrl,
  input  logic [DATA_W-1:0] a,
  input  logic              stall,
  output logic [DATA_W-1:0] y
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [DATA_W-1:0] regs [DEPTH];
  logic              do_wr, do_rd;
  logic [AW-1:0]     wa, ra;

  always_comb begin
    do_wr = !stall && ctrl.valid && (ctrl.op == OP_RFW || ctrl.op == OP_RFWR);
    do_rd = !stall && ctrl.valid && (ctrl.op == OP_RFR || ctrl.op == OP_RFWR);
    wa    = ctrl.rd[AW-1:0];
    ra    = ctrl.rs[AW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) regs[i] <= '0;
      y <= '0;
    end else begin
      if (do_wr) regs[wa] <= a;
      if (do_rd) y <= regs[ra];
    end
  end

endmodule
