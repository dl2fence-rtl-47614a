// flood_path - testbench helper: ports of an R x R XY-routed mesh that a
// flood from `src` to `dst` passes through. hit[d][n] is set when node n
// receives the flood on its input port of direction d (E=0, N=1, W=2, S=3):
// flits moving west enter at east ports, moving east at west ports, moving
// to lower y at north ports and to higher y at south ports. Node IDs are
// y*R + x. Also returns the full route (every node after src).
package flood_path;
  localparam int RMAX = 16;

  function automatic void xy_flood(input int R, input int src, input int dst,
                                   output bit hit [4][RMAX*RMAX],
                                   output bit route [RMAX*RMAX]);
    int x, y, xd, yd;
    for (int d = 0; d < 4; d++) for (int n = 0; n < RMAX*RMAX; n++) hit[d][n] = 0;
    for (int n = 0; n < RMAX*RMAX; n++) route[n] = 0;
    x = src % R; y = src / R; xd = dst % R; yd = dst / R;
    while (x != xd) begin
      if (xd < x) begin x--; hit[0][y*R+x] = 1; end
      else        begin x++; hit[2][y*R+x] = 1; end
      route[y*R+x] = 1;
    end
    while (y != yd) begin
      if (yd < y) begin y--; hit[1][y*R+x] = 1; end
      else        begin y++; hit[3][y*R+x] = 1; end
      route[y*R+x] = 1;
    end
  endfunction
endpackage
