// tb_switchbox -- self-checking test of one switchbox: random configuration
// written through the configuration port, random track and tile values, and
// every outgoing track and tile input compared with a model of the
// selection rules; reset clears all connections.  The model holds the Wilton
// permutation as a table of forward turns (from one side to another) and
// finds the source track of each outgoing track by searching it, so it does
// not share the design's inverse form.
module tb_switchbox;
  import rblk_pkg::*;
  localparam int T = 3, NI = 2, W = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we;
  logic [5:0] cfg_idx;
  logic [7:0] cfg_data;
  logic [W-1:0] nin [4][T];
  logic [W-1:0] nout [4][T];
  logic [W-1:0] tile_out;
  logic [W-1:0] tile_in [NI];
  switchbox #(.W(W), .TRACKS(T), .N_TIN(NI)) u_dut (.clk, .rst_n, .cfg_we, .cfg_idx, .cfg_data,
                                                   .nin, .nout, .tile_out, .tile_in);

  initial begin
    repeat (50000) @(posedge clk);
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

  // Wilton turn: track t on side `from` goes to this track on side `to`
  // (sides 0 north, 1 east, 2 south, 3 west).
  function automatic int turn(int from, int to, int t);
    if ((from + 2) % 4 == to) return t;
    case (from * 4 + to)
      3 * 4 + 0: return (T - t) % T;
      3 * 4 + 2: return (T + t - 1) % T;
      1 * 4 + 0: return (T + t - 1) % T;
      1 * 4 + 2: return (2 * T - 2 - t) % T;
      2 * 4 + 3: return (t + 1) % T;
      2 * 4 + 1: return (2 * T - 2 - t) % T;
      0 * 4 + 3: return (T - t) % T;
      0 * 4 + 1: return (t + 1) % T;
      default: return -1;
    endcase
  endfunction

  // incoming track on side s that the switchbox sends out on side d, track t
  function automatic int src_track(int s, int d, int t);
    for (int k = 0; k < T; k++) if (turn(s, d, k) == t) return k;
    return -1;
  endfunction

  int osel [4][T];
  int isel [NI];
  logic [W-1:0] e;
  initial begin
    cfg_we = 0; cfg_idx = 0; cfg_data = 0; tile_out = 0;
    foreach (nin[d, t]) nin[d][t] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 200; round++) begin
      // new configuration
      foreach (osel[d, t]) begin
        osel[d][t] = $urandom % 5;
        @(negedge clk);
        cfg_we = 1; cfg_idx = 6'(d * T + t); cfg_data = 8'(osel[d][t]);
      end
      foreach (isel[i]) begin
        isel[i] = $urandom % (4 * T + 2);
        @(negedge clk);
        cfg_we = 1; cfg_idx = 6'(4 * T + i); cfg_data = 8'(isel[i]);
      end
      @(negedge clk);
      cfg_we = 0;
      for (int v = 0; v < 10; v++) begin
        foreach (nin[d, t]) nin[d][t] = W'($urandom);
        tile_out = W'($urandom);
        #1;
        foreach (osel[d, t]) begin
          e = (osel[d][t] == 0) ? '0 : (osel[d][t] == 4) ? tile_out : nin[(d + osel[d][t]) % 4][src_track((d + osel[d][t]) % 4, d, t)];
          check($sformatf("out %0d.%0d", d, t), nout[d][t] == e);
        end
        foreach (isel[i]) begin
          e = (isel[i] == 0) ? '0 : (isel[i] == 4 * T + 1) ? tile_out :
              nin[(isel[i] - 1) / T][(isel[i] - 1) % T];
          check($sformatf("tile_in %0d", i), tile_in[i] == e);
        end
      end
    end
    rst_n = 0;
    #1;
    foreach (nout[d, t]) check("reset clears", nout[d][t] == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
