// dl2f_pkg - shared types, constants and helper functions of the DL2Fence
// DoS detector/localizer.
//
// Directional feature frames: a router's input port is named after the side
// it faces (E, N, W, S). Node IDs follow id = y*R + x, so the east neighbour
// of a node is id+1 and the north neighbour is id+R; this is the numbering
// under which the Table-Like Method gives an eastern attacker as Max(E)+1 and
// a northern one as Max(N)+R. A border router has no port towards the
// outside, so every directional frame holds (R-1) x R pixels:
//   E frame: row r = x (0..R-2),   column c = y
//   W frame: row r = x-1 (x=1..R-1), column c = y
//   N frame: row r = y (0..R-2),   column c = x
//   S frame: row r = y-1 (y=1..R-1), column c = x
// E/W frames are therefore stored transposed, so that one CNN shape serves
// all four directions. Zero padding a frame back to R x R (right, left, top
// or bottom) is the inverse of this mapping.
//
// Arithmetic: activations and weights are signed fixed point with FRAC
// fractional bits (Q8.8 by default). Products are accumulated at full
// precision (2*FRAC fractional bits) and rescaled once per output.
package dl2f_pkg;

  localparam int unsigned DW   = 16;   // activation / weight width
  localparam int unsigned FRAC = 8;    // fractional bits
  localparam int unsigned ACCW = 40;   // accumulator width
  localparam int unsigned NCH  = 8;    // convolution kernels per layer
  localparam int unsigned IDW  = 16;   // node ID width

  typedef enum logic [1:0] {
    DIR_E = 2'd0,
    DIR_N = 2'd1,
    DIR_W = 2'd2,
    DIR_S = 2'd3
  } dir_e;

  typedef logic signed [DW-1:0]   act_t;
  typedef logic signed [ACCW-1:0] acc_t;
  typedef logic [IDW-1:0]         node_id_t;

  // Node ID of pixel (r, c) of the frame of direction d in an R x R mesh.
  function automatic node_id_t pix2node(input logic [1:0] d, input int r,
                                        input int c, input int R);
    int x, y;
    case (d)
      DIR_E:   begin x = r;     y = c;     end
      DIR_W:   begin x = r + 1; y = c;     end
      DIR_N:   begin x = c;     y = r;     end
      default: begin x = c;     y = r + 1; end
    endcase
    return node_id_t'(y * R + x);
  endfunction

  // Rescale a full-precision accumulator to an activation, with saturation.
  function automatic act_t sat_act(input acc_t a);
    acc_t s;
    s = a >>> FRAC;
    if (s > acc_t'(32767))       return act_t'(16'sh7fff);
    else if (s < acc_t'(-32768)) return act_t'(16'sh8000);
    else                         return act_t'(s[DW-1:0]);
  endfunction

  function automatic act_t relu(input act_t a);
    return a[DW-1] ? '0 : a;
  endfunction

  function automatic acc_t mul(input act_t a, input act_t b);
    return acc_t'(a) * acc_t'(b);
  endfunction

  // Table-Like Method, two-frame columns: an E/W frame plus an N/S frame
  // come from a single attacker when the N/S victims share one column and
  // the E/W victims span less than one row.
  function automatic logic single_attacker(input logic [3:0] mask,
                                           input node_id_t mn [4],
                                           input node_id_t mx [4],
                                           input int R);
    logic [1:0] ew, ns;
    case (mask)
      4'b0001, 4'b0010, 4'b0100, 4'b1000: return 1'b1;
      4'b0011, 4'b1001, 4'b0110, 4'b1100: begin
        ew = mask[DIR_E] ? DIR_E : DIR_W;
        ns = mask[DIR_N] ? DIR_N : DIR_S;
        return ((int'(mx[ns]) - int'(mn[ns])) % R == 0) &&
               ((int'(mx[ew]) - int'(mn[ew])) < R - 1);
      end
      default: return 1'b0;
    endcase
  endfunction

endpackage
