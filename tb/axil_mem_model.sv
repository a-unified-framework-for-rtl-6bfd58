// axil_mem_model -- behavioural AXI4-Lite memory for testbenches (stands in
// for the external memory of the system).  DEPTH words; byte address bits
// [..:2] select the word.  Each channel answers after a random delay of up to
// MAX_WAIT cycles, so that handshakes with back-pressure are exercised.
// Counts the read and write transactions it serves.
module axil_mem_model
  import rblk_pkg::*;
#(
  parameter int unsigned DEPTH    = 1024,
  parameter int unsigned MAX_WAIT = 3
) (
  input  logic      clk,
  input  axil_req_t req,
  output axil_rsp_t rsp,
  output int        n_reads,
  output int        n_writes
);
  logic [31:0] mem [DEPTH];
  int unsigned rwait = 0, wwait = 0;

  initial begin
    rsp = '0;
    n_reads = 0;
    n_writes = 0;
    for (int i = 0; i < int'(DEPTH); i++) mem[i] = 0;
  end

  always @(posedge clk) begin
    // read channel: address handshake, then the data beat
    if (rsp.rvalid && req.rready) rsp.rvalid <= 1'b0;
    if (rsp.arready && req.arvalid) begin
      rsp.arready <= 1'b0;
      rsp.rvalid  <= 1'b1;
      rsp.rdata   <= mem[(req.araddr >> 2) % DEPTH];
      n_reads++;
    end else if (req.arvalid && !rsp.arready && !rsp.rvalid) begin
      if (rwait == 0) begin
        rsp.arready <= 1'b1;
        rwait = $urandom % (MAX_WAIT + 1);
      end else rwait--;
    end
    // write channel: address and data taken together, then the response
    if (rsp.bvalid && req.bready) rsp.bvalid <= 1'b0;
    if (rsp.awready && req.awvalid && req.wvalid) begin
      rsp.awready <= 1'b0;
      rsp.wready  <= 1'b0;
      rsp.bvalid  <= 1'b1;
      mem[(req.awaddr >> 2) % DEPTH] = req.wdata;
      n_writes++;
    end else if (req.awvalid && req.wvalid && !rsp.awready && !rsp.bvalid) begin
      if (wwait == 0) begin
        rsp.awready <= 1'b1;
        rsp.wready  <= 1'b1;
        wwait = $urandom % (MAX_WAIT + 1);
      end else wwait--;
    end
  end
endmodule
