// noc_router_pkg -- testbench helper that routes connections through a mesh
// of switchboxes and produces the configuration words for them.
//
// A connection goes from the output of tile (r0, c0) to input port p of tile
// (r1, c1).  It travels along the row first, then along the column (XY
// routing).  The track keeps its number going straight and is permuted at
// the turn by the Wilton pattern of the switchboxes; the router takes the
// lowest starting track for which every segment of the path is still free.
// The same tile output may be routed any number of times.  Configuration
// values follow the switchbox field encoding.
package noc_router_pkg;
  import rblk_pkg::wilton_track;

  typedef struct {
    int sb;
    int idx;
    int data;
  } cfg_word_t;

  class Router;
    int rows, cols, tracks;
    bit used [int];   // key: (sb * 4 + dir) * tracks + track
    cfg_word_t words [$];

    function new(int rows, int cols, int tracks);
      this.rows = rows;
      this.cols = cols;
      this.tracks = tracks;
    endfunction

    function int key(int sb, int dir, int t);
      return (sb * 4 + dir) * tracks + t;
    endfunction

    // Returns 1 on success and appends the configuration words.
    function bit route(int r0, int c0, int r1, int c1, int port);
      int path_sb [$];
      int path_dir [$];
      int path_t [$];
      int r, c, t, t0, in_side, s;
      if (r0 == r1 && c0 == c1) begin
        words.push_back('{r1 * cols + c1, 4 * tracks + port, 4 * tracks + 1});
        return 1;
      end
      r = r0; c = c0;
      while (c != c1) begin
        path_sb.push_back(r * cols + c);
        path_dir.push_back(c1 > c ? 1 : 3);
        c += (c1 > c) ? 1 : -1;
      end
      while (r != r1) begin
        path_sb.push_back(r * cols + c);
        path_dir.push_back(r1 > r ? 2 : 0);
        r += (r1 > r) ? 1 : -1;
      end
      for (t0 = 0; t0 < tracks; t0++) begin
        bit free = 1;
        path_t.delete();
        t = t0;
        foreach (path_sb[i]) begin
          if (i > 0) begin
            in_side = (path_dir[i-1] + 2) % 4;        // side it entered from
            t = int'(wilton_track(in_side, path_dir[i], t, tracks));
          end
          path_t.push_back(t);
          if (used.exists(key(path_sb[i], path_dir[i], t))) free = 0;
        end
        if (free) break;
      end
      if (t0 == tracks) return 0;
      foreach (path_sb[i]) begin
        used[key(path_sb[i], path_dir[i], path_t[i])] = 1;
        if (i == 0) s = 4;
        else begin
          in_side = (path_dir[i-1] + 2) % 4;
          s = (in_side - path_dir[i] + 4) % 4;
        end
        words.push_back('{path_sb[i], path_dir[i] * tracks + path_t[i], s});
      end
      in_side = (path_dir[path_dir.size() - 1] + 2) % 4;
      words.push_back('{r1 * cols + c1, 4 * tracks + port, 1 + in_side * tracks + path_t[path_t.size() - 1]});
      return 1;
    endfunction
  endclass

endpackage
