// cnn_detector - CNN classifier that flags a VCO feature frame as a DoS frame.
//
// Network (one (R-1) x R single-channel frame in, one decision out):
//   Conv2d   3x3, NCH=8 kernels, no padding, + ReLU -> (R-3) x (R-2) x 8
//   MaxPool  2x2, stride 2                           -> PH x PW x 8
//   Flatten  (row, column, channel; channel fastest) -> PH*PW*8
//   Dense    one output + sigmoid; sigmoid(z) > 0.5 is tested as z > 0
// For R = 16 this gives 15x16 -> 13x14x8 -> 6x7x8 -> 336 -> 1. R must be at
// least 6, or nothing is left after pooling.
//
// Datapath: one output pixel of one kernel per cycle, i.e. nine multipliers
// working on a full 3x3 window. The convolution pass fills an on-chip feature
// buffer (8*(R-3)*(R-2) cycles); the dense pass then reads one pooled value
// per cycle, taking the max of its four inputs on the fly, and accumulates
// it against its dense weight (PH*PW*8 cycles). `done` pulses one cycle after
// the last product, with `dos` (frame abnormal) and `logit` (dense output,
// Q8.8, saturated) valid until the next start.
//
// Weights are loaded through wt_we/wt_addr/wt_data (Q8.8) before use:
//   addr f*9 + ky*3 + kx        conv kernel f        (0 .. 71)
//   addr 72 + f                 conv bias f          (72 .. 79)
//   addr 80 + i                 dense weight i       (i = flatten index)
//   addr 80 + PH*PW*8           dense bias
// The layer sequence, 8 kernels, ReLU and sigmoid follow the paper; kernel
// size, pooling size and stride are read from its layer shapes. The
// fixed-point format, the serial schedule and the weight map are this
// design's choices.
module cnn_detector
  import dl2f_pkg::*;
#(
  parameter int unsigned R = 16,
  localparam int unsigned H   = R - 1,
  localparam int unsigned W   = R,
  localparam int unsigned CH  = H - 2,
  localparam int unsigned CW  = W - 2,
  localparam int unsigned PH  = CH / 2,
  localparam int unsigned PW  = CW / 2,
  localparam int unsigned NFL = PH * PW * NCH,
  localparam int unsigned NW  = NCH * 9 + NCH + NFL + 1,
  localparam int unsigned AW  = $clog2(NW)
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
  output logic          dos,
  output act_t          logit
);

  // the pooled map must not be empty
  if (R < 6) begin : g_size_check
    $error("cnn_detector needs R >= 6");
  end

  localparam int unsigned B_OFS = NCH * 9;
  localparam int unsigned D_OFS = B_OFS + NCH;

  act_t wmem [NW];
  act_t fmap [NCH][CH][CW];

  typedef enum logic [1:0] {S_IDLE, S_CONV, S_DENSE, S_END} state_e;
  state_e state;

  localparam int unsigned FB = $clog2(NCH);
  localparam int unsigned YB = $clog2(H);
  localparam int unsigned XB = $clog2(W);
  localparam logic [FB-1:0] F_LAST  = FB'(NCH - 1);
  localparam logic [YB-1:0] CY_LAST = YB'(CH - 1);
  localparam logic [XB-1:0] CX_LAST = XB'(CW - 1);
  localparam logic [YB-1:0] PY_LAST = YB'(PH - 1);
  localparam logic [XB-1:0] PX_LAST = XB'(PW - 1);

  logic [FB-1:0] f;
  logic [YB-1:0] y;
  logic [XB-1:0] x;
  acc_t                   acc;

  always_ff @(posedge clk) begin
    if (wt_we && wt_addr < AW'(NW)) wmem[wt_addr] <= wt_data;
  end

  // 3x3 window of the input at (y, x) against kernel f
  acc_t conv_sum;
  always_comb begin
    conv_sum = acc_t'(wmem[B_OFS + int'(f)]) <<< FRAC;
    for (int ky = 0; ky < 3; ky++)
      for (int kx = 0; kx < 3; kx++)
        conv_sum += mul(wmem[int'(f)*9 + ky*3 + kx], frame[int'(y)+ky][int'(x)+kx]);
  end

  // pooled value (y, x) of channel f and its dense weight
  act_t pool_v;
  int unsigned fl_idx;
  always_comb begin
    pool_v = fmap[f][2*y][2*x];
    if (fmap[f][2*y][2*x+1]   > pool_v) pool_v = fmap[f][2*y][2*x+1];
    if (fmap[f][2*y+1][2*x]   > pool_v) pool_v = fmap[f][2*y+1][2*x];
    if (fmap[f][2*y+1][2*x+1] > pool_v) pool_v = fmap[f][2*y+1][2*x+1];
    fl_idx = (int'(y) * PW + int'(x)) * NCH + int'(f);
  end

  acc_t acc_fin;
  assign acc_fin = acc + (acc_t'(wmem[D_OFS + NFL]) <<< FRAC);

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      f     <= '0;
      y     <= '0;
      x     <= '0;
      acc   <= '0;
      done  <= 1'b0;
      dos   <= 1'b0;
      logit <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_CONV;
          f <= '0; y <= '0; x <= '0;
        end
        S_CONV: begin
          fmap[f][y][x] <= relu(sat_act(conv_sum));
          if (x == CX_LAST) begin
            x <= '0;
            if (y == CY_LAST) begin
              y <= '0;
              if (f == F_LAST) begin
                f     <= '0;
                acc   <= '0;
                state <= S_DENSE;
              end else f <= f + 1'b1;
            end else y <= y + 1'b1;
          end else x <= x + 1'b1;
        end
        S_DENSE: begin
          acc <= acc + mul(wmem[D_OFS + fl_idx], pool_v);
          if (f == F_LAST) begin
            f <= '0;
            if (x == PX_LAST) begin
              x <= '0;
              if (y == PY_LAST) begin
                y     <= '0;
                state <= S_END;
              end else y <= y + 1'b1;
            end else x <= x + 1'b1;
          end else f <= f + 1'b1;
        end
        S_END: begin
          dos   <= (acc_fin > 0);
          logit <= sat_act(acc_fin);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
