// boc_normalizer - max-normalizes one BOC frame to the range [0, 1].
//
// BOC values are integer counts, so before segmentation each pixel is divided
// by the largest count of its frame: out = floor(in * 2**FRAC / max), an
// unsigned Q8.8 value in [0, 1.0]. A frame whose maximum is zero gives zeros.
//
// Operation: pulse `start` with the frame on `frame_in` (held stable until
// `done`). The block first scans the frame for its maximum (one pixel per
// cycle), then divides each pixel with a restoring divider that produces one
// quotient bit per cycle (FRAC+1 cycles per pixel). `done` pulses for one
// cycle when `frame_out` is complete; frame_out holds until the next start.
// Latency: P + P*(FRAC+1) + 1 cycles for P = (R-1)*R pixels (a zero frame
// takes P + P + 1).
//
// The paper states that BOC needs normalization; scaling by the frame maximum
// and the divider are this design's choices.
module boc_normalizer
  import dl2f_pkg::*;
#(
  parameter int unsigned R     = 16,
  parameter int unsigned BOC_W = 20
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [BOC_W-1:0] frame_in  [R-1][R],
  output act_t             frame_out [R-1][R],
  output logic             busy,
  output logic             done
);

  localparam int unsigned H  = R - 1;
  localparam int unsigned QW = FRAC + 1;

  typedef enum logic [1:0] {S_IDLE, S_MAX, S_DIV} state_e;
  state_e state;

  localparam int unsigned RW = $clog2(R);
  localparam logic [RW-1:0] R_LAST = RW'(H - 1);
  localparam logic [RW-1:0] C_LAST = RW'(R - 1);

  logic [RW-1:0]         r, c;
  logic [BOC_W-1:0]      maxv;
  logic [BOC_W:0]        rem;
  logic [QW-2:0]         quo;   // quotient bits so far
  logic [$clog2(QW+1)-1:0] bitn;   // quotient bits still to produce
  logic                  loaded;

  logic last_pix;
  assign last_pix = (r == R_LAST) && (c == C_LAST);
  assign busy     = (state != S_IDLE);

  // one restoring-division step
  logic [BOC_W:0] rem_sh, rem_nx;
  logic           qbit;
  always_comb begin
    rem_sh = loaded ? rem : {1'b0, frame_in[r][c]};
    qbit   = (rem_sh >= {1'b0, maxv});
    rem_nx = qbit ? rem_sh - {1'b0, maxv} : rem_sh;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      r      <= '0;
      c      <= '0;
      maxv   <= '0;
      rem    <= '0;
      quo    <= '0;
      bitn   <= '0;
      loaded <= 1'b0;
      done   <= 1'b0;
      for (int i = 0; i < H; i++)
        for (int j = 0; j < R; j++) frame_out[i][j] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_MAX;
          r     <= '0;
          c     <= '0;
          maxv  <= '0;
        end
        S_MAX: begin
          if (frame_in[r][c] > maxv) maxv <= frame_in[r][c];
          if (last_pix) begin
            state  <= S_DIV;
            r      <= '0;
            c      <= '0;
            loaded <= 1'b0;
            bitn   <= ($clog2(QW+1))'(QW);
            quo    <= '0;
          end else if (c == C_LAST) begin
            c <= '0;
            r <= r + 1'b1;
          end else c <= c + 1'b1;
        end
        S_DIV: begin
          if (maxv == '0) begin
            frame_out[r][c] <= '0;
            bitn <= '0;
          end else begin
            quo    <= {quo[QW-3:0], qbit};
            rem    <= {rem_nx[BOC_W-1:0], 1'b0};
            loaded <= 1'b1;
            bitn   <= bitn - 1'b1;
            if (bitn == 1)
              frame_out[r][c] <= act_t'({quo[QW-2:0], qbit});
          end
          if (bitn == 1 || maxv == '0) begin
            loaded <= 1'b0;
            quo    <= '0;
            bitn   <= ($clog2(QW+1))'(QW);
            if (last_pix) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else if (c == C_LAST) begin
              c <= '0;
              r <= r + 1'b1;
            end else c <= c + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
