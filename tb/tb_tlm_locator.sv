// tb_tlm_locator - self-checking test of tlm_locator (R = 8).
// Single attackers: random attacker/victim pairs are routed XY by the
// flood_path helper; the attacker ID from the table must equal the real
// attacker and `single` must be set. Two attackers flooding one victim
// from opposite sides (E & W, N & S) must yield both attacker IDs with
// `multi` set. The remaining table columns are checked against the table
// entries evaluated here on random min/max IDs.
module tb_tlm_locator;
  import dl2f_pkg::*;
  import flood_path::*;
  localparam int R = 8;

  logic [3:0] dir_hit;
  node_id_t   min_id [4], max_id [4];
  node_id_t   att_id [3];
  logic [2:0] att_valid;
  logic       single, multi;
  int checks = 0, failures = 0;

  tlm_locator #(.R(R)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic set_from(input bit hit [4][RMAX*RMAX]);
    for (int d = 0; d < 4; d++) begin
      dir_hit[d] = 0; min_id[d] = '0; max_id[d] = '0;
      for (int n = R*R-1; n >= 0; n--) if (hit[d][n]) begin dir_hit[d] = 1; min_id[d] = node_id_t'(n); end
      for (int n = 0; n < R*R; n++) if (hit[d][n]) max_id[d] = node_id_t'(n);
    end
  endtask

  function automatic bit has(int id);
    for (int i = 0; i < 3; i++) if (att_valid[i] && int'(att_id[i]) == id) return 1;
    return 0;
  endfunction

  initial begin
    bit h1 [4][RMAX*RMAX], h2 [4][RMAX*RMAX], rt [RMAX*RMAX];
    int a, v, a2, e [3], ne;
    // single attacker
    for (int it = 0; it < 300; it++) begin
      a = $urandom_range(0, R*R-1);
      do v = $urandom_range(0, R*R-1); while (v == a);
      xy_flood(R, a, v, h1, rt);
      set_from(h1);
      #1;
      checks += 3;
      if (!(att_valid == 3'b001 && int'(att_id[0]) == a)) begin
        failures++; $display("single a=%0d v=%0d got %0d", a, v, att_id[0]);
      end
      if (!single) begin failures++; $display("single flag a=%0d v=%0d", a, v); end
      if (multi) begin failures++; $display("multi flag a=%0d v=%0d", a, v); end
    end
    // two attackers in the victim's row (E & W) and column (N & S)
    for (int it = 0; it < 100; it++) begin
      int vx, vy;
      vx = $urandom_range(1, R-2); vy = $urandom_range(1, R-2); v = vy*R + vx;
      if (it % 2 == 0) begin a = vy*R + $urandom_range(vx+1, R-1); a2 = vy*R + $urandom_range(0, vx-1); end
      else             begin a = $urandom_range(vy+1, R-1)*R + vx; a2 = $urandom_range(0, vy-1)*R + vx; end
      xy_flood(R, a, v, h1, rt);
      xy_flood(R, a2, v, h2, rt);
      for (int d = 0; d < 4; d++) for (int n = 0; n < R*R; n++) h1[d][n] |= h2[d][n];
      set_from(h1);
      #1;
      checks += 2;
      if (!(has(a) && has(a2) && att_valid == 3'b011)) begin
        failures++; $display("pair a=%0d a2=%0d v=%0d", a, a2, v);
      end
      if (!multi) begin failures++; $display("pair multi"); end
    end
    // remaining columns on random IDs
    for (int it = 0; it < 200; it++) begin
      int ae, an, aw, as_;
      for (int d = 0; d < 4; d++) begin
        min_id[d] = node_id_t'($urandom_range(R, R*R-R-1));
        max_id[d] = node_id_t'($urandom_range(R, R*R-R-1));
      end
      ae = int'(max_id[0]) + 1; an = int'(max_id[1]) + R;
      aw = int'(min_id[2]) - 1; as_ = int'(min_id[3]) - R;
      case (it % 5)
        0: begin dir_hit = 4'b0111; e = '{ae, aw, 0}; ne = 2; end
        1: begin dir_hit = 4'b1101; e = '{ae, aw, as_}; ne = 3; end
        2: begin dir_hit = 4'b1011; e = '{ae, an, as_}; ne = 3; end
        3: begin dir_hit = 4'b1110; e = '{aw, an, as_}; ne = 3; end
        default: begin dir_hit = 4'b1111; e = '{ae, aw, 0}; ne = 2; end
      endcase
      #1;
      checks += 2;
      for (int i = 0; i < ne; i++)
        if (!has(e[i])) begin failures++; $display("col %0d missing %0d", it % 5, e[i]); end
      if (!multi || $countones(att_valid) != ne) begin failures++; $display("col %0d count", it % 5); end
    end
    // two frames, attackers in different rows -> multi
    dir_hit = 4'b0011; min_id[0] = node_id_t'(R + 1); max_id[0] = node_id_t'(3*R + 2);
    min_id[1] = node_id_t'(2); max_id[1] = node_id_t'(R + 2);
    #1; checks++;
    if (!multi || single || int'(att_id[0]) != 3*R + 3) begin failures++; $display("two-row multi"); end
    dir_hit = 4'b0000; #1; checks++;
    if (att_valid != 0) begin failures++; $display("empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
