// mff_fusion - Multi-Frame Fusion of the directional segmentation masks.
//
// Each directional mask seg[d] ((R-1) x R, already binary) is zero padded
// back to a full R x R node map: the E frame gains the empty rightmost
// column, W the leftmost, N the top row (y = R-1) and S the bottom row
// (y = 0); see dl2f_pkg for the pixel-to-node mapping. Only directions with
// seg_valid[d] set take part. The fused victim map is the OR of the padded
// maps: bit n of `victims` marks node n as a routing-path or target victim.
// Per direction the block also reports whether its map is non-empty
// (`dir_hit`) and the smallest and largest victim ID in it (`min_id`,
// `max_id`, zero for an empty map), which the Table-Like Method and the
// victim completion consume.
//
// Purely combinational. Fusion by OR, so a node seen in two directions
// (the turn of an XY route) still counts as one victim, is this design's
// reading of the paper's summation followed by "pixel == 1".
module mff_fusion
  import dl2f_pkg::*;
#(
  parameter int unsigned R = 16
) (
  input  logic [R-1:0]   seg       [4][R-1],
  input  logic [3:0]     seg_valid,
  output logic [R*R-1:0] victims,
  output logic [3:0]     dir_hit,
  output node_id_t       min_id    [4],
  output node_id_t       max_id    [4]
);

  logic [R*R-1:0] full [4];

  always_comb begin
    for (int d = 0; d < 4; d++) begin
      full[d] = '0;
      for (int r = 0; r < R - 1; r++)
        for (int c = 0; c < R; c++)
          if (seg_valid[d] && seg[d][r][c])
            full[d][int'(pix2node(d[1:0], r, c, R))] = 1'b1;
    end
    victims = full[0] | full[1] | full[2] | full[3];
    for (int d = 0; d < 4; d++) begin
      dir_hit[d] = |full[d];
      min_id[d]  = '0;
      max_id[d]  = '0;
      for (int n = R * R - 1; n >= 0; n--)
        if (full[d][n]) min_id[d] = node_id_t'(n);
      for (int n = 0; n < R * R; n++)
        if (full[d][n]) max_id[d] = node_id_t'(n);
    end
  end

endmodule
