// program_loader -- AXI4-Lite subordinate through which the host programs
// and starts the array.
//
// The host writes the bitstream (instruction words for every ID bank) into
// the instruction memory and the connection pattern of both networks into
// the switchboxes, then writes the start bit and polls the status register
// until the array reports that it has halted.  The paper states what the
// loader is for; the address map, the single-beat AXI4-Lite protocol and the
// start/status register are this design's choices.
//
// Address map (byte addresses, 32-bit words):
//   0x0_0000  CTRL/STATUS  write: bit 0 = start.  read: bit 0 running, bit 1 halted
//   0x1_0000  instruction memory: bank = addr[14:10], word = addr[9:2]
//   0x2_0000  data-network switchboxes:    switchbox = addr[15:8], field = addr[7:2]
//   0x3_0000  control-network switchboxes: switchbox = addr[15:8], field = addr[7:2]
// Writes elsewhere are accepted and ignored; reads elsewhere return 0.
//
// Timing: a write is accepted when address and data are both valid and no
// response is pending; its side effect happens at that clock edge and the
// write response follows one cycle later.  Reads answer one cycle after the
// address handshake.
module program_loader
  import rblk_pkg::*;
#(
  parameter int unsigned N_BANK   = 8,
  parameter int unsigned IM_DEPTH = 256
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  axil_req_t                     s_req,
  output axil_rsp_t                     s_rsp,
  // instruction memory write port
  output logic                          im_we,
  output logic [$clog2(N_BANK)-1:0]     im_bank,
  output logic [$clog2(IM_DEPTH)-1:0]   im_addr,
  output logic [INSTR_W-1:0]            im_wdata,
  // network configuration
  output cfg_wr_t                       dcfg,
  output cfg_wr_t                       ccfg,
  // core control
  output logic                          start,
  input  logic                          running,
  input  logic                          halted
);

  logic        bvalid, rvalid;
  logic [31:0] rdata;
  logic        wr_fire, rd_fire;
  logic [3:0]  wreg;

  always_comb begin
    wr_fire = s_req.awvalid && s_req.wvalid && !bvalid;
    rd_fire = s_req.arvalid && !rvalid;
    wreg    = s_req.awaddr[19:16];

    s_rsp         = '0;
    s_rsp.awready = wr_fire;
    s_rsp.wready  = wr_fire;
    s_rsp.bvalid  = bvalid;
    s_rsp.bresp   = 2'b00;
    s_rsp.arready = rd_fire;
    s_rsp.rvalid  = rvalid;
    s_rsp.rdata   = rdata;
    s_rsp.rresp   = 2'b00;

    im_we    = wr_fire && wreg == 4'h1;
    im_bank  = s_req.awaddr[10 +: $clog2(N_BANK)];
    im_addr  = s_req.awaddr[2 +: $clog2(IM_DEPTH)];
    im_wdata = s_req.wdata;

    dcfg.we   = wr_fire && wreg == 4'h2;
    dcfg.sb   = s_req.awaddr[15:8];
    dcfg.idx  = s_req.awaddr[7:2];
    dcfg.data = s_req.wdata[7:0];
    ccfg      = dcfg;
    ccfg.we   = wr_fire && wreg == 4'h3;

    start = wr_fire && wreg == 4'h0 && s_req.wdata[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid <= 1'b0;
      rvalid <= 1'b0;
      rdata  <= '0;
    end else begin
      if (wr_fire) bvalid <= 1'b1;
      else if (s_req.bready) bvalid <= 1'b0;
      if (rd_fire) begin
        rvalid <= 1'b1;
        rdata  <= (s_req.araddr[19:16] == 4'h0) ? {30'd0, halted, running} : '0;
      end else if (s_req.rready) begin
        rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response stays valid until it is accepted.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             bvalid && !s_req.bready |=> bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             rvalid && !s_req.rready |=> rvalid && $stable(rdata));

endmodule
