// tb_noc_mesh -- self-checking test of the 6 x 6 mesh: in each round the
// mesh is reset, a set of random connections (including fan-out of one tile
// output and a tile looping to itself) is routed with the XY router and
// written into the switchboxes, and then for several random sets of tile
// output values every connected tile input must show its source's value and
// every unconnected one zero.
module tb_noc_mesh;
  import rblk_pkg::*;
  import noc_router_pkg::*;
  localparam int R = 6, C = 6, T = 4, NI = 2, W = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic [W-1:0] tile_out [R*C];
  logic [W-1:0] tile_in [R*C][NI];
  noc_mesh #(.R(R), .C(C), .W(W), .TRACKS(T), .N_TIN(NI)) u_dut (.clk, .rst_n, .cfg, .tile_out, .tile_in);

  initial begin
    repeat (200000) @(posedge clk);
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

  Router rt;
  int src [R*C][NI];
  int s, d, p, nroutes;
  initial begin
    cfg = '0;
    foreach (tile_out[i]) tile_out[i] = 0;
    for (int round = 0; round < 30; round++) begin
      rst_n = 0;
      repeat (2) @(negedge clk);
      rst_n = 1;
      rt = new(R, C, T);
      foreach (src[i, k]) src[i][k] = -1;
      nroutes = 0;
      for (int n = 0; n < 25; n++) begin
        s = $urandom % (R * C);
        d = (n == 0) ? s : $urandom % (R * C);
        p = $urandom % NI;
        if (src[d][p] >= 0) continue;
        if (rt.route(s / C, s % C, d / C, d % C, p)) begin
          src[d][p] = s;
          nroutes++;
        end
      end
      foreach (rt.words[i]) begin
        @(negedge clk);
        cfg.we = 1; cfg.sb = 8'(rt.words[i].sb); cfg.idx = 6'(rt.words[i].idx);
        cfg.data = 8'(rt.words[i].data);
      end
      @(negedge clk);
      cfg.we = 0;
      check("routes placed", nroutes > 5);
      for (int v = 0; v < 5; v++) begin
        foreach (tile_out[i]) tile_out[i] = W'($urandom | 1);
        #1;
        foreach (src[i, k])
          check($sformatf("tile %0d in %0d from %0d", i, k, src[i][k]),
                tile_in[i][k] == ((src[i][k] >= 0) ? tile_out[src[i][k]] : '0));
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
