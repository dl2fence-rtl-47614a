// vce_xy - Victim Completing Enhancement (optional stage).
//
// A segmentation result can miss routers on the flooding route. When the
// attack is recognised as a single-attacker pattern (see
// dl2f_pkg::single_attacker) this block redraws the whole route with the
// mesh's own XY routing: X first, then Y, from a pseudo source (the
// victim adjacent to the attacker) to the target victim (TV, the end of the
// route). Both are read off the per-direction extreme IDs:
//   pseudo source: Max(E) if E is hit, else Min(W), else Max(N), else Min(S)
//   target victim: Min(N) if N is hit, else Max(S), else Min(E), else Max(W)
// (flits travelling west reach east ports at decreasing IDs, and so on).
// The route is ORed into the victim map. With `en` low, or for any other
// pattern, victims pass unchanged and `applied` is low. `tv_id` is valid
// whenever `tv_valid` is high (single-attacker pattern, whether or not en).
//
// Purely combinational. The paper gives the function (pseudo source next to
// the attacker, destination, XY routing); how the two IDs are chosen is this
// design's own derivation from the XY routing rule.
module vce_xy
  import dl2f_pkg::*;
#(
  parameter int unsigned R = 16
) (
  input  logic           en,
  input  logic [R*R-1:0] victims_in,
  input  logic [3:0]     dir_hit,
  input  node_id_t       min_id [4],
  input  node_id_t       max_id [4],
  output logic [R*R-1:0] victims_out,
  output logic           applied,
  output logic           tv_valid,
  output node_id_t       tv_id,
  output node_id_t       psrc_id
);

  logic           single;
  logic [R*R-1:0] route;

  always_comb begin
    int xs, ys, xd, yd;
    single = single_attacker(dir_hit, min_id, max_id, R);

    if (dir_hit[DIR_E])      psrc_id = max_id[DIR_E];
    else if (dir_hit[DIR_W]) psrc_id = min_id[DIR_W];
    else if (dir_hit[DIR_N]) psrc_id = max_id[DIR_N];
    else                     psrc_id = min_id[DIR_S];

    if (dir_hit[DIR_N])      tv_id = min_id[DIR_N];
    else if (dir_hit[DIR_S]) tv_id = max_id[DIR_S];
    else if (dir_hit[DIR_E]) tv_id = min_id[DIR_E];
    else                     tv_id = max_id[DIR_W];

    xs = int'(psrc_id) % R;  ys = int'(psrc_id) / R;
    xd = int'(tv_id) % R;    yd = int'(tv_id) / R;
    route = '0;
    for (int n = 0; n < R * R; n++) begin
      automatic int x = n % R;
      automatic int y = n / R;
      if (y == ys && ((x >= xs && x <= xd) || (x <= xs && x >= xd))) route[n] = 1'b1;
      if (x == xd && ((y >= ys && y <= yd) || (y <= ys && y >= yd))) route[n] = 1'b1;
    end

    tv_valid    = single;
    applied     = en && single;
    victims_out = applied ? (victims_in | route) : victims_in;
  end

endmodule
