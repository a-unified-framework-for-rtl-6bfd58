// switchbox -- one programmable switchbox of a 2D-mesh network.
//
// Each switchbox sits at one tile position.  It has TRACKS wires of W bits
// towards each of its four neighbours (index 0 = north, 1 = east, 2 = south,
// 3 = west) and connects the local tile: the tile's output can be injected on
// any outgoing track, and each of the tile's N_TIN inputs can pick any
// incoming track (or the tile's own output, for loops on one tile).
//
// The paper builds its meshes from Wilton switchboxes but prints no track
// permutation; this design uses Wilton's pattern in the form common FPGA
// routing tools use (rblk_pkg::wilton_track): going straight keeps the track
// number, a turn moves to a permuted track.  Which of the three other sides
// feeds an outgoing track, and which incoming track feeds a tile input, is
// programmable.  The connection pattern is static: it is written once
// through the configuration port and then held.
//
// Configuration fields (cfg_idx), reset to 0 = unconnected:
//   d*TRACKS + t      outgoing track t on side d:
//                     0 none, 1..3 incoming side s = (d+v)%4 (v = value),
//                     track wilton_track(d, s, t), 4 tile output
//   4*TRACKS + i      tile input i:
//                     0 none, 1 + d*TRACKS + t incoming side d track t,
//                     1 + 4*TRACKS tile output
//
// Timing: the data path is combinational, so a route of any length is
// crossed in the cycle the source register drives it.  Because the mesh is
// a ring of such paths, lint tools see a structural combinational loop
// through neighbouring switchboxes; a legal configuration never closes it.
module switchbox
  import rblk_pkg::*;
#(
  parameter int unsigned W      = 32,
  parameter int unsigned TRACKS = 4,
  parameter int unsigned N_TIN  = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         cfg_we,
  input  logic [5:0]   cfg_idx,
  input  logic [7:0]   cfg_data,
  input  logic [W-1:0] nin  [4][TRACKS],
  output logic [W-1:0] nout [4][TRACKS],
  input  logic [W-1:0] tile_out,
  output logic [W-1:0] tile_in [N_TIN]
);

  localparam int unsigned N_OUT = 4 * TRACKS;

  logic [2:0] osel [4][TRACKS];
  logic [7:0] isel [N_TIN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < 4; d++)
        for (int t = 0; t < int'(TRACKS); t++) osel[d][t] <= '0;
      for (int i = 0; i < int'(N_TIN); i++) isel[i] <= '0;
    end else if (cfg_we) begin
      if (int'(cfg_idx) < int'(N_OUT))
        osel[int'(cfg_idx) / TRACKS][int'(cfg_idx) % TRACKS] <= cfg_data[2:0];
      else if (int'(cfg_idx) < int'(N_OUT + N_TIN))
        isel[int'(cfg_idx) - N_OUT] <= cfg_data;
    end
  end

  // Outgoing tracks.  The source track of each turn is a constant of the
  // side and track, fixed at elaboration.
  for (genvar d = 0; d < 4; d++) begin : g_side
    for (genvar t = 0; t < int'(TRACKS); t++) begin : g_track
      localparam int unsigned S1 = (d + 1) % 4, S2 = (d + 2) % 4, S3 = (d + 3) % 4;
      localparam int unsigned T1 = wilton_track(d, S1, t, TRACKS);
      localparam int unsigned T2 = wilton_track(d, S2, t, TRACKS);
      localparam int unsigned T3 = wilton_track(d, S3, t, TRACKS);
      always_comb begin
        case (osel[d][t])
          3'd1:    nout[d][t] = nin[S1][T1];
          3'd2:    nout[d][t] = nin[S2][T2];
          3'd3:    nout[d][t] = nin[S3][T3];
          3'd4:    nout[d][t] = tile_out;
          default: nout[d][t] = '0;
        endcase
      end
    end
  end

  always_comb begin
    for (int i = 0; i < int'(N_TIN); i++) begin
      tile_in[i] = '0;
      for (int s = 0; s < int'(N_OUT); s++)
        if (int'(isel[i]) == s + 1) tile_in[i] = nin[s / TRACKS][s % TRACKS];
      if (int'(isel[i]) == int'(N_OUT) + 1) tile_in[i] = tile_out;
    end
  end

endmodule
