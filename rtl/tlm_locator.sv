// tlm_locator - Table-Like Method (TLM) attacker localization.
//
// Under XY routing, the set of directions whose segmented frame holds
// victims (`dir_hit`, bit order E,N,W,S) tells from which side the flood
// enters, and the extreme victim IDs of those directions then give the
// attacker IDs (Max(D)/Min(D) = largest/smallest victim ID in direction D):
//   one frame     E: Max(E)+1   N: Max(N)+R   W: Min(W)-1   S: Min(S)-R
//   E|W + N|S     Max(E)+1 or Min(W)-1; one attacker if the N/S victims
//                 share a column and the E/W victims span < R-1 IDs,
//                 otherwise >= 2 attackers, found over several rounds
//   E & W         Min(W)-1, Max(E)+1
//   N & S         Min(S)-R, Max(N)+R
//   E & N & W     Max(E)+1, Min(W)-1
//   E & W & S     Max(E)+1, Min(W)-1, Min(S)-R
//   E & N & S     Max(E)+1, Max(N)+R, Min(S)-R
//   W & N & S     Min(W)-1, Max(N)+R, Min(S)-R
//   all four      Max(E)+1, Min(W)-1
// Outputs: up to three attacker IDs with valid bits, `multi` when the table
// predicts two or more attackers (the framework then runs further rounds),
// and `single` for the one-attacker columns. Nothing is valid when no frame
// is hit. Purely combinational. The table is the paper's; the output
// encoding is this design's choice.
module tlm_locator
  import dl2f_pkg::*;
#(
  parameter int unsigned R = 16
) (
  input  logic [3:0] dir_hit,
  input  node_id_t   min_id  [4],
  input  node_id_t   max_id  [4],
  output node_id_t   att_id  [3],
  output logic [2:0] att_valid,
  output logic       single,
  output logic       multi
);

  node_id_t a_e, a_n, a_w, a_s;
  assign a_e = max_id[DIR_E] + node_id_t'(1);
  assign a_n = max_id[DIR_N] + node_id_t'(R);
  assign a_w = min_id[DIR_W] - node_id_t'(1);
  assign a_s = min_id[DIR_S] - node_id_t'(R);

  always_comb begin
    att_id    = '{default: '0};
    att_valid = 3'b000;
    single    = single_attacker(dir_hit, min_id, max_id, R);
    multi     = 1'b0;
    // bit order {S, W, N, E}
    case (dir_hit)
      4'b0001: begin att_id[0] = a_e; att_valid = 3'b001; end
      4'b0010: begin att_id[0] = a_n; att_valid = 3'b001; end
      4'b0100: begin att_id[0] = a_w; att_valid = 3'b001; end
      4'b1000: begin att_id[0] = a_s; att_valid = 3'b001; end
      4'b0011, 4'b1001: begin
        att_id[0] = a_e; att_valid = 3'b001; multi = !single;
      end
      4'b0110, 4'b1100: begin
        att_id[0] = a_w; att_valid = 3'b001; multi = !single;
      end
      4'b0101: begin  // E & W
        att_id[0] = a_w; att_id[1] = a_e; att_valid = 3'b011; multi = 1'b1;
      end
      4'b1010: begin  // N & S
        att_id[0] = a_s; att_id[1] = a_n; att_valid = 3'b011; multi = 1'b1;
      end
      4'b0111: begin  // E & N & W
        att_id[0] = a_e; att_id[1] = a_w; att_valid = 3'b011; multi = 1'b1;
      end
      4'b1101: begin  // E & W & S
        att_id[0] = a_e; att_id[1] = a_w; att_id[2] = a_s; att_valid = 3'b111; multi = 1'b1;
      end
      4'b1011: begin  // E & N & S
        att_id[0] = a_e; att_id[1] = a_n; att_id[2] = a_s; att_valid = 3'b111; multi = 1'b1;
      end
      4'b1110: begin  // W & N & S
        att_id[0] = a_w; att_id[1] = a_n; att_id[2] = a_s; att_valid = 3'b111; multi = 1'b1;
      end
      4'b1111: begin
        att_id[0] = a_e; att_id[1] = a_w; att_valid = 3'b011; multi = 1'b1;
      end
      default: ;
    endcase
  end

endmodule
