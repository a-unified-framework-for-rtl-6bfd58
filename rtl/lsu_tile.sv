// lsu_tile -- load/store unit tile towards external memory.
//
// The LSU is the array's only path to the system memory: its requests go to
// the arbiter, which turns them into AXI4-Lite transactions.  OP_LD reads the
// external word at word address (a + imm) onto y; OP_ST writes operand b
// there.  Because the external latency is unknown, the LSU asks the whole
// array to stall (stall_req) from the cycle it sees the opcode until the
// response has arrived, so that every tile executes each instruction exactly
// once.  The stall scheme and the word addressing are this design's own
// choices; the paper shows only an LSU tile connected to an arbiter.
//
// States: IDLE (request raised as soon as a memory opcode is seen), WAIT
// (request held), DONE (response buffered; stall released so the
// instruction retires; back to IDLE once the global stall is low).  Load
// data reach y at the retire edge, like any other tile's result, so an
// instruction in the same slot as a load still sees the previous value.
module lsu_tile
  import rblk_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  ctrl_t             ctrl,
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  input  logic              stall,      // global stall (includes stall_req)
  output logic              stall_req,
  output mem_req_t          mreq,
  input  mem_rsp_t          mrsp,
  output logic [DATA_W-1:0] y
);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_DONE} state_e;
  state_e            state;
  logic              is_mem;
  logic [DATA_W-1:0] rbuf;

  always_comb begin
    is_mem     = ctrl.valid && (ctrl.op == OP_LD || ctrl.op == OP_ST);
    stall_req  = is_mem && state != S_DONE;
    mreq.valid = stall_req;
    mreq.we    = ctrl.op == OP_ST;
    mreq.addr  = a + ctrl.imm;
    mreq.wdata = b;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      rbuf  <= '0;
      y     <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_WAIT: begin
          if (is_mem) state <= S_WAIT;
          if (is_mem && mrsp.valid) begin
            state <= S_DONE;
            rbuf  <= mrsp.rdata;
          end
        end
        S_DONE: if (!stall) begin
          state <= S_IDLE;
          if (ctrl.op == OP_LD) y <= rbuf;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A response only ever answers an outstanding request.
  a_rsp_has_req: assert property (@(posedge clk) disable iff (!rst_n)
                                  mrsp.valid |-> mreq.valid);

endmodule
