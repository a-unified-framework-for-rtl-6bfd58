// arbiter -- shares one AXI4-Lite manager port to external memory among the
// array's load/store units.
//
// Requests (one outstanding word access per LSU) are served one at a time in
// round-robin order starting after the last requester served.  A read
// becomes an AR/R transaction, a write an AW+W/B transaction with all byte
// strobes set; word address n maps to byte address 4n.  When the response
// arrives the arbiter returns a one-cycle response pulse to the requester.
// The paper shows an arbiter between the LSU and the AXI bus; the policy and
// protocol subset are this design's choices.
//
// Timing: grant in the cycle after a request is seen idle, then the AXI
// handshakes, then the response pulse; at least four cycles per access.
module arbiter
  import rblk_pkg::*;
#(
  parameter int unsigned N_REQ = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  mem_req_t   req [N_REQ],
  output mem_rsp_t   rsp [N_REQ],
  output axil_req_t  m_req,
  input  axil_rsp_t  m_rsp
);

  localparam int unsigned IW = (N_REQ > 1) ? $clog2(N_REQ) : 1;

  typedef enum logic [2:0] {A_IDLE, A_AR, A_R, A_AW, A_B, A_RSP} state_e;

  state_e            state;
  logic [IW-1:0]     cur;      // requester being served
  logic [IW-1:0]     last;     // last requester served
  logic              aw_done, w_done;
  logic [DATA_W-1:0] rbuf;
  logic              pick_ok;
  logic [IW-1:0]     pick;

  // Round-robin choice among the valid requests.
  always_comb begin
    pick_ok = 1'b0;
    pick    = '0;
    for (int k = 1; k <= int'(N_REQ); k++) begin
      int unsigned j;
      j = (int'(last) + k) % N_REQ;
      if (!pick_ok && req[j].valid) begin
        pick_ok = 1'b1;
        pick    = IW'(j);
      end
    end
  end

  always_comb begin
    m_req         = '0;
    m_req.arvalid = state == A_AR;
    m_req.araddr  = {req[cur].addr[29:0], 2'b00};
    m_req.rready  = state == A_R;
    m_req.awvalid = state == A_AW && !aw_done;
    m_req.awaddr  = {req[cur].addr[29:0], 2'b00};
    m_req.wvalid  = state == A_AW && !w_done;
    m_req.wdata   = req[cur].wdata;
    m_req.wstrb   = 4'hF;
    m_req.bready  = state == A_B;
    for (int i = 0; i < int'(N_REQ); i++) begin
      rsp[i].valid = state == A_RSP && int'(cur) == i;
      rsp[i].rdata = rbuf;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= A_IDLE;
      cur     <= '0;
      last    <= IW'(N_REQ - 1);
      aw_done <= 1'b0;
      w_done  <= 1'b0;
      rbuf    <= '0;
    end else begin
      unique case (state)
        A_IDLE: if (pick_ok) begin
          cur     <= pick;
          last    <= pick;
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          state   <= req[pick].we ? A_AW : A_AR;
        end
        A_AR: if (m_rsp.arready) state <= A_R;
        A_R: if (m_rsp.rvalid) begin
          rbuf  <= m_rsp.rdata;
          state <= A_RSP;
        end
        A_AW: begin
          if (m_rsp.awready) aw_done <= 1'b1;
          if (m_rsp.wready)  w_done  <= 1'b1;
          if ((aw_done || m_rsp.awready) && (w_done || m_rsp.wready)) state <= A_B;
        end
        A_B: if (m_rsp.bvalid) state <= A_RSP;
        A_RSP: state <= A_IDLE;
        default: state <= A_IDLE;
      endcase
    end
  end

  // AXI rule: a valid address or data stays asserted until its handshake.
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              m_req.arvalid && !m_rsp.arready |=> m_req.arvalid);
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              m_req.awvalid && !m_rsp.awready |=> m_req.awvalid);
  a_w_hold:  assert property (@(posedge clk) disable iff (!rst_n)
                              m_req.wvalid && !m_rsp.wready |=> m_req.wvalid);

endmodule
