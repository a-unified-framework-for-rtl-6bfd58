// tb_arbiter -- self-checking test of the arbiter with three requesters on
// a behavioural AXI4-Lite memory: random reads and writes from all three at
// once, every read compared with a model of the memory, round-robin
// fairness (no requester waits for more than N-1 others), response pulse
// goes only to the requester served, and the transaction counts of the
// memory match the requests.
module tb_arbiter;
  import rblk_pkg::*;
  localparam int N = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mem_req_t  req [N];
  mem_rsp_t  rsp [N];
  axil_req_t m_req;
  axil_rsp_t m_rsp;
  int n_reads, n_writes;

  arbiter #(.N_REQ(N)) u_dut (.clk, .rst_n, .req, .rsp, .m_req, .m_rsp);
  axil_mem_model #(.DEPTH(64), .MAX_WAIT(3)) u_mem (.clk, .req(m_req), .rsp(m_rsp), .n_reads, .n_writes);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  logic [31:0] model [64];
  int served [N];
  int total_r = 0, total_w = 0;
  int others_since [N];

  // Requester processes: one outstanding access each.
  for (genvar g = 0; g < N; g++) begin : g_req
    initial begin
      req[g] = '0;
      @(posedge rst_n);
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        req[g].valid = 1;
        req[g].we    = ($urandom % 2);
        req[g].addr  = 32'(g * 16 + ($urandom % 16));   // disjoint regions
        req[g].wdata = $urandom;
        do @(posedge clk); while (!rsp[g].valid);
        if (req[g].we) begin
          model[req[g].addr] = req[g].wdata;
          total_w++;
        end else begin
          check($sformatf("read data req%0d", g), rsp[g].rdata == model[req[g].addr]);
          total_r++;
        end
        served[g]++;
        @(negedge clk);
        req[g].valid = 0;
        repeat ($urandom % 3) @(negedge clk);
      end
    end
  end

  // Fairness and exclusivity of responses.
  always @(posedge clk) if (rst_n) begin
    int cnt;
    cnt = 0;
    for (int i = 0; i < N; i++) if (rsp[i].valid) cnt++;
    if (cnt > 0) begin
      check("one response at a time", cnt == 1);
      for (int i = 0; i < N; i++) begin
        if (rsp[i].valid) others_since[i] = 0;
        else if (req[i].valid) begin
          others_since[i]++;
          check("round robin bound", others_since[i] <= N - 1);
        end
      end
    end
  end

  initial begin
    foreach (model[i]) model[i] = 0;
    foreach (served[i]) begin served[i] = 0; others_since[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (served[0] == 300 && served[1] == 300 && served[2] == 300);
    repeat (5) @(posedge clk);
    check("memory read count", n_reads == total_r);
    check("memory write count", n_writes == total_w);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
