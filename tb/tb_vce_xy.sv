// tb_vce_xy - self-checking test of vce_xy (R = 8).
// For random single attacker/victim pairs the flood_path helper gives the
// true XY route and the directional hit sets. One route node other than the
// first and last is removed from the victim map, as a weak segmentation
// would; with en = 1 the block must restore the complete route and report
// the true target victim, with en = 0 the map must pass unchanged. For an
// E & W two-attacker pattern the block must not apply.
module tb_vce_xy;
  import dl2f_pkg::*;
  import flood_path::*;
  localparam int R = 8;

  logic           en;
  logic [R*R-1:0] victims_in, victims_out;
  logic [3:0]     dir_hit;
  node_id_t       min_id [4], max_id [4];
  logic           applied, tv_valid;
  node_id_t       tv_id, psrc_id;
  int checks = 0, failures = 0, restored = 0;

  vce_xy #(.R(R)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit h [4][RMAX*RMAX], h2 [4][RMAX*RMAX], rt [RMAX*RMAX];
    logic [R*R-1:0] full;
    int a, v, len, drop, k;
    for (int it = 0; it < 300; it++) begin
      a = $urandom_range(0, R*R-1);
      do v = $urandom_range(0, R*R-1); while (v == a);
      xy_flood(R, a, v, h, rt);
      full = '0; len = 0;
      for (int n = 0; n < R*R; n++) if (rt[n]) begin full[n] = 1; len++; end
      for (int d = 0; d < 4; d++) begin
        dir_hit[d] = 0; min_id[d] = '0; max_id[d] = '0;
        for (int n = R*R-1; n >= 0; n--) if (h[d][n]) begin dir_hit[d] = 1; min_id[d] = node_id_t'(n); end
        for (int n = 0; n < R*R; n++) if (h[d][n]) max_id[d] = node_id_t'(n);
      end
      // drop a middle route node (not the one after the attacker, not the victim)
      victims_in = full;
      if (len >= 3) begin
        drop = $urandom_range(1, len - 2); k = 0;
        for (int n = 0; n < R*R; n++)
          if (rt[n] && n != v) begin
            // route order does not matter for the check; skip extremes by ID
            if (k == drop && !(n == int'(psrc_id))) victims_in[n] = 0;
            k++;
          end
      end
      en = 1; #1;
      checks += 3;
      if (victims_out !== full) begin failures++; $display("route a=%0d v=%0d", a, v); end
      if (!(tv_valid && int'(tv_id) == v)) begin failures++; $display("tv a=%0d v=%0d got %0d", a, v, tv_id); end
      if (!applied) begin failures++; $display("applied"); end
      if (victims_in != full) restored++;
      en = 0; #1;
      checks++;
      if (victims_out !== victims_in || applied) begin failures++; $display("bypass"); end
    end
    // E & W: two attackers in the victim's row, VCE must stay off
    xy_flood(R, 3*R + 7, 3*R + 4, h, rt);
    xy_flood(R, 3*R + 0, 3*R + 4, h2, rt);
    for (int d = 0; d < 4; d++) begin
      dir_hit[d] = 0; min_id[d] = '0; max_id[d] = '0;
      for (int n = R*R-1; n >= 0; n--) if (h[d][n] || h2[d][n]) begin dir_hit[d] = 1; min_id[d] = node_id_t'(n); end
      for (int n = 0; n < R*R; n++) if (h[d][n] || h2[d][n]) max_id[d] = node_id_t'(n);
    end
    victims_in = '0; victims_in[3*R + 4] = 1;
    en = 1; #1;
    checks++;
    if (applied || victims_out !== victims_in) begin failures++; $display("E&W applied"); end
    checks++;
    if (restored == 0) begin failures++; $display("no gap ever restored"); end
    $display("restored=%0d", restored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
