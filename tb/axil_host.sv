// axil_host -- behavioural AXI4-Lite manager for testbenches (plays the host
// processor).  Tasks write() and read() perform one single-beat transaction
// each and wait for its response.
module axil_host
  import rblk_pkg::*;
(
  input  logic      clk,
  output axil_req_t req,
  input  axil_rsp_t rsp
);
  initial req = '0;

  // Handshakes are sampled at the falling edge: ready seen there with valid
  // high means the transfer happens at the next rising edge.
  task automatic write(input logic [31:0] addr, input logic [31:0] data);
    @(negedge clk);
    req.awvalid = 1; req.awaddr = addr;
    req.wvalid  = 1; req.wdata  = data; req.wstrb = 4'hF;
    req.bready  = 1;
    forever begin
      #1;
      if (rsp.awready && rsp.wready) break;
      @(negedge clk);
    end
    @(negedge clk);
    req.awvalid = 0; req.wvalid = 0;
    while (!rsp.bvalid) @(negedge clk);
    @(negedge clk);
    req.bready = 0;
  endtask

  task automatic read(input logic [31:0] addr, output logic [31:0] data);
    @(negedge clk);
    req.arvalid = 1; req.araddr = addr; req.rready = 1;
    forever begin
      #1;
      if (rsp.arready) break;
      @(negedge clk);
    end
    @(negedge clk);
    req.arvalid = 0;
    while (!rsp.rvalid) @(negedge clk);
    data = rsp.rdata;
    @(negedge clk);
    req.rready = 0;
  endtask
endmodule
