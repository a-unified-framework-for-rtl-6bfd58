// noc_mesh -- programmable 2D-mesh network of switchboxes.
//
// The array has two such networks (the paper's two programmable NoCs): one
// of W = 32 bits that moves data between tiles, and one as wide as a control
// word that carries each instruction-decode tile's control word to the tiles
// it drives.  One switchbox sits at every tile position and is wired to its
// four neighbours with TRACKS wires per direction; tracks leaving the edge of
// the grid are unconnected and incoming edge tracks read zero.
//
// Interface: tile_out[i] / tile_in[i][k] for tile i = row * COLS + col;
// configuration writes address switchbox cfg.sb and field cfg.idx (see
// switchbox).  Timing: combinational from tile_out to tile_in, configuration
// written one word per clock.
//
// Lint reports circular combinational logic on sb_out.  The loop is in the
// structure, not in any working configuration: a switchbox may send a track
// on to a neighbour that could send it back.  The router never programs a
// route that returns to a switchbox it has passed, so no configured path
// closes a cycle.  Registering the tracks would break the structural loop
// but would add one cycle per hop, where the design moves a value anywhere
// in one cycle.
module noc_mesh
  import rblk_pkg::*;
#(
  parameter int unsigned R      = 6,
  parameter int unsigned C      = 6,
  parameter int unsigned W      = 32,
  parameter int unsigned TRACKS = 4,
  parameter int unsigned N_TIN  = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  cfg_wr_t      cfg,
  input  logic [W-1:0] tile_out [R*C],
  output logic [W-1:0] tile_in  [R*C][N_TIN]
);

  localparam int unsigned NORTH = 0, EAST = 1, SOUTH = 2, WEST = 3;

  logic [W-1:0] sb_in  [R*C][4][TRACKS];
  logic [W-1:0] sb_out [R*C][4][TRACKS];

  for (genvar r = 0; r < int'(R); r++) begin : g_row
    for (genvar c = 0; c < int'(C); c++) begin : g_col
      localparam int unsigned I = r * C + c;

      for (genvar t = 0; t < int'(TRACKS); t++) begin : g_trk
        if (r > 0) begin : g_n
          assign sb_in[I][NORTH][t] = sb_out[I-C][SOUTH][t];
        end else begin : g_n0
          assign sb_in[I][NORTH][t] = '0;
        end
        if (r < int'(R) - 1) begin : g_s
          assign sb_in[I][SOUTH][t] = sb_out[I+C][NORTH][t];
        end else begin : g_s0
          assign sb_in[I][SOUTH][t] = '0;
        end
        if (c < int'(C) - 1) begin : g_e
          assign sb_in[I][EAST][t] = sb_out[I+1][WEST][t];
        end else begin : g_e0
          assign sb_in[I][EAST][t] = '0;
        end
        if (c > 0) begin : g_w
          assign sb_in[I][WEST][t] = sb_out[I-1][EAST][t];
        end else begin : g_w0
          assign sb_in[I][WEST][t] = '0;
        end
      end

      switchbox #(.W(W), .TRACKS(TRACKS), .N_TIN(N_TIN)) u_sb (
        .clk,
        .rst_n,
        .cfg_we   (cfg.we && int'(cfg.sb) == int'(I)),
        .cfg_idx  (cfg.idx),
        .cfg_data (cfg.data),
        .nin      (sb_in[I]),
        .nout     (sb_out[I]),
        .tile_out (tile_out[I]),
        .tile_in  (tile_in[I])
      );
    end
  end

endmodule
