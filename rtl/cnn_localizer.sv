// cnn_localizer - CNN segmentation of one normalized BOC frame.
//
// Network (every layer keeps the (R-1) x R frame size, zero padding):
//   Conv2d 3x3, 1 -> NCH=8 kernels, + ReLU
//   Conv2d 3x3, 8 -> 8 kernels,     + ReLU
//   Conv2d 3x3, 8 -> 1 kernel, sigmoid, binarized at 0.5 (tested as z > 0)
// The result is a bit mask `seg` of the routers on the flooding route as
// seen through this frame's direction.
//
// Datapath: nine multipliers evaluate one 3x3 window of one input channel
// per cycle. Layer 1 takes one cycle per output pixel and kernel, layers 2
// and 3 one cycle per output pixel, kernel and input channel, with the
// partial sum held in `acc`. Two on-chip buffers hold the 8-channel feature
// maps. For P = (R-1)*R pixels the run takes 8P + 64P + 8P cycles plus one
// (19201 for R = 16); `done` pulses when `seg` is complete, and seg holds
// until the next start. The input frame must be held stable while busy.
//
// Weights (Q8.8) are loaded through wt_we/wt_addr/wt_data:
//   0   + f*9 + k            layer 1 kernel f, tap k = ky*3+kx
//   72  + f                  layer 1 bias
//   80  + (f*8 + ci)*9 + k   layer 2 kernel f, input channel ci
//   656 + f                  layer 2 bias
//   664 + ci*9 + k           layer 3, input channel ci
//   736                      layer 3 bias
// Three convolutions, 8 kernels per layer and the (R-1) x R shapes follow
// the paper; the 3x3 kernel size, the ReLUs of the hidden layers, the output
// sigmoid with a 0.5 threshold, number format and schedule are this design's
// choices.
module cnn_localizer
  import dl2f_pkg::*;
#(
  parameter int unsigned R = 16,
  localparam int unsigned H  = R - 1,
  localparam int unsigned W  = R,
  localparam int unsigned NW = 737,
  localparam int unsigned AW = $clog2(NW)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wt_we,
  input  logic [AW-1:0] wt_addr,
  input  act_t          wt_data,
  input  logic          start,
  input  act_t          frame [H][W],
  output logic          busy,
  output logic          done,
  output logic [W-1:0]  seg [H]
);

  localparam int unsigned B1 = 72;
  localparam int unsigned W2 = 80;
  localparam int unsigned B2 = 656;
  localparam int unsigned W3 = 664;
  localparam int unsigned B3 = 736;

  act_t wmem [NW];
  act_t fm1 [NCH][H][W];
  act_t fm2 [NCH][H][W];

  typedef enum logic [1:0] {S_IDLE, S_L1, S_L2, S_L3} state_e;
  state_e state;

  localparam int unsigned FB = $clog2(NCH);
  localparam int unsigned YB = $clog2(H);
  localparam int unsigned XB = $clog2(W);
  localparam logic [FB-1:0] F_LAST = FB'(NCH - 1);
  localparam logic [YB-1:0] Y_LAST = YB'(H - 1);
  localparam logic [XB-1:0] X_LAST = XB'(W - 1);

  logic [FB-1:0] f, ci;
  logic [YB-1:0] y;
  logic [XB-1:0] x;
  acc_t                   acc;

  always_ff @(posedge clk) begin
    if (wt_we && wt_addr < AW'(NW)) wmem[wt_addr] <= wt_data;
  end

  // one 3x3 window (zero padded) of the current input channel
  acc_t win_sum;
  always_comb begin
    win_sum = '0;
    for (int ky = 0; ky < 3; ky++)
      for (int kx = 0; kx < 3; kx++) begin
        automatic int   iy = int'(y) + ky - 1;
        automatic int   ix = int'(x) + kx - 1;
        automatic act_t a  = '0;
        automatic act_t w  = '0;
        if (iy >= 0 && iy < H && ix >= 0 && ix < W) begin
          case (state)
            S_L1:    a = frame[iy][ix];
            S_L2:    a = fm1[int'(ci)][iy][ix];
            default: a = fm2[int'(ci)][iy][ix];
          endcase
        end
        case (state)
          S_L1:    w = wmem[int'(f)*9 + ky*3 + kx];
          S_L2:    w = wmem[W2 + (int'(f)*NCH + int'(ci))*9 + ky*3 + kx];
          default: w = wmem[W3 + int'(ci)*9 + ky*3 + kx];
        endcase
        win_sum += mul(w, a);
      end
  end

  // complete sum of the current output (bias on the first channel)
  acc_t sum;
  always_comb begin
    case (state)
      S_L1:    sum = win_sum + (acc_t'(wmem[B1 + int'(f)]) <<< FRAC);
      S_L2:    sum = (ci == 0) ? win_sum + (acc_t'(wmem[B2 + int'(f)]) <<< FRAC) : acc + win_sum;
      default: sum = (ci == 0) ? win_sum + (acc_t'(wmem[B3]) <<< FRAC) : acc + win_sum;
    endcase
  end

  logic last_yx;
  assign last_yx = (y == Y_LAST) && (x == X_LAST);
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      f <= '0; ci <= '0; y <= '0; x <= '0;
      acc  <= '0;
      done <= 1'b0;
      for (int i = 0; i < H; i++) seg[i] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_L1;
          f <= '0; ci <= '0; y <= '0; x <= '0;
        end
        S_L1: begin
          fm1[f][y][x] <= relu(sat_act(sum));
          if (last_yx) begin
            y <= '0; x <= '0;
            if (f == F_LAST) begin
              f <= '0;
              state <= S_L2;
            end else f <= f + 1'b1;
          end else if (x == X_LAST) begin
            x <= '0; y <= y + 1'b1;
          end else x <= x + 1'b1;
        end
        S_L2: begin
          acc <= sum;
          if (ci == F_LAST) begin
            ci <= '0;
            fm2[f][y][x] <= relu(sat_act(sum));
            if (last_yx) begin
              y <= '0; x <= '0;
              if (f == F_LAST) begin
                f <= '0;
                state <= S_L3;
              end else f <= f + 1'b1;
            end else if (x == X_LAST) begin
              x <= '0; y <= y + 1'b1;
            end else x <= x + 1'b1;
          end else ci <= ci + 1'b1;
        end
        S_L3: begin
          acc <= sum;
          if (ci == F_LAST) begin
            ci <= '0;
            seg[y][x] <= (sum > 0);
            if (last_yx) begin
              y <= '0; x <= '0;
              state <= S_IDLE;
              done  <= 1'b1;
            end else if (x == X_LAST) begin
              x <= '0; y <= y + 1'b1;
            end else x <= x + 1'b1;
          end else ci <= ci + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
