// tb_mff_fusion - self-checking test of mff_fusion (R = 6).
// Random directional masks and valid bits are applied; the fused victim
// map, the per-direction hit flags and min/max IDs are compared with a
// reference that pads each frame with this testbench's own node mapping.
module tb_mff_fusion;
  import dl2f_pkg::*;
  localparam int R = 6;

  logic [R-1:0]   seg [4][R-1];
  logic [3:0]     seg_valid;
  logic [R*R-1:0] victims;
  logic [3:0]     dir_hit;
  node_id_t       min_id [4], max_id [4];
  int checks = 0, failures = 0;

  mff_fusion #(.R(R)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 200; it++) begin
      logic [R*R-1:0] full [4];
      logic [R*R-1:0] ev;
      int density;
      density = $urandom_range(0, 3);
      seg_valid = 4'($urandom);
      for (int d = 0; d < 4; d++) begin
        full[d] = '0;
        for (int r = 0; r < R-1; r++)
          for (int c = 0; c < R; c++) begin
            seg[d][r][c] = ($urandom_range(0, 15) < density);
            if (seg[d][r][c] && seg_valid[d]) begin
              case (d)
                0: full[d][c*R + r] = 1'b1;         // E: x = r, y = c
                1: full[d][r*R + c] = 1'b1;         // N: y = r, x = c
                2: full[d][c*R + r + 1] = 1'b1;     // W: x = r+1
                default: full[d][(r+1)*R + c] = 1'b1; // S: y = r+1
              endcase
            end
          end
      end
      ev = full[0] | full[1] | full[2] | full[3];
      #1;
      checks++;
      if (victims !== ev) begin failures++; $display("victims mismatch it %0d", it); end
      for (int d = 0; d < 4; d++) begin
        int mn, mx;
        mn = 0; mx = 0;
        for (int n = 0; n < R*R; n++) if (full[d][n]) begin mx = n; end
        for (int n = R*R-1; n >= 0; n--) if (full[d][n]) begin mn = n; end
        checks += 3;
        if (dir_hit[d] != (full[d] != 0)) begin failures++; $display("hit d%0d", d); end
        if (int'(min_id[d]) != mn) begin failures++; $display("min d%0d", d); end
        if (int'(max_id[d]) != mx) begin failures++; $display("max d%0d", d); end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
