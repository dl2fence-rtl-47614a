// dl2fence_ctrl - round sequencer of the DL2Fence framework.
//
// One round:
//   1. SAMPLE   pulse `sample`: the feature monitor freezes the VCO and BOC
//               frames of all four directions; the segmentation store is
//               cleared (`seg_clear`).
//   2. DETECT   run the CNN detector on the VCO frames E, N, W, S in turn
//               (det_start / det_done, frame chosen by `dir`), collecting
//               one abnormal flag per direction in `abn_mask`.
//   3. LOCALIZE for each abnormal direction only: normalize its BOC frame
//               (norm_start / norm_done), segment it (loc_start /
//               loc_done) and store the mask (`seg_we`, direction `dir`).
//   4. REPORT   `result_valid` pulses; `round_dos` tells whether any frame
//               was abnormal. Fusion, victim completion and the Table-Like
//               Method are combinational in the top and are latched here.
// With no abnormal frame the next round starts `period` cycles after the
// previous sample (periodic monitoring). After a round that found an attack
// the next sample is taken at once, so missed attackers are chased round
// after round until no abnormal frame is left. Dropping `enable` parks the
// sequencer in IDLE after the current round.
//
// The round structure follows the paper's operational flow; the handshake
// (start pulse, done pulse), the sampling timer and the immediate resampling
// after an attack round are this design's choices.
module dl2fence_ctrl #(
  parameter int unsigned PW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          enable,
  input  logic [PW-1:0] period,
  output logic          sample,
  output logic          seg_clear,
  output logic [1:0]    dir,
  output logic          det_start,
  input  logic          det_done,
  input  logic          det_dos,
  output logic          norm_start,
  input  logic          norm_done,
  output logic          loc_start,
  input  logic          loc_done,
  output logic          seg_we,
  output logic [3:0]    abn_mask,
  output logic          result_valid,
  output logic          round_dos,
  output logic          busy
);

  typedef enum logic [3:0] {
    S_IDLE, S_WAIT, S_SAMPLE, S_DET_GO, S_DET_WAIT, S_LOC_SEL,
    S_NORM_GO, S_NORM_WAIT, S_LOC_GO, S_LOC_WAIT, S_REPORT
  } state_e;
  state_e state;

  logic [PW-1:0] timer;

  assign sample     = (state == S_SAMPLE);
  assign seg_clear  = (state == S_SAMPLE);
  assign det_start  = (state == S_DET_GO);
  assign norm_start = (state == S_NORM_GO);
  assign loc_start  = (state == S_LOC_GO);
  assign seg_we     = (state == S_LOC_WAIT) && loc_done;
  assign result_valid = (state == S_REPORT);
  assign round_dos  = |abn_mask;
  assign busy       = !(state == S_IDLE || state == S_WAIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      timer    <= '0;
      dir      <= '0;
      abn_mask <= '0;
    end else begin
      if (state != S_WAIT) timer <= timer + 1'b1;
      case (state)
        S_IDLE: if (enable) begin
          state <= S_WAIT;
          timer <= '0;
        end
        S_WAIT: begin
          timer <= timer + 1'b1;
          if (!enable) state <= S_IDLE;
          else if (timer + 1'b1 >= period) state <= S_SAMPLE;
        end
        S_SAMPLE: begin
          timer    <= PW'(1);
          dir      <= '0;
          abn_mask <= '0;
          state    <= S_DET_GO;
        end
        S_DET_GO: state <= S_DET_WAIT;
        S_DET_WAIT: if (det_done) begin
          abn_mask[dir] <= det_dos;
          if (dir == 2'd3) begin
            dir   <= '0;
            state <= S_LOC_SEL;
          end else begin
            dir   <= dir + 1'b1;
            state <= S_DET_GO;
          end
        end
        S_LOC_SEL: begin
          if (abn_mask[dir])      state <= S_NORM_GO;
          else if (dir == 2'd3)   state <= S_REPORT;
          else                    dir   <= dir + 1'b1;
        end
        S_NORM_GO: state <= S_NORM_WAIT;
        S_NORM_WAIT: if (norm_done) state <= S_LOC_GO;
        S_LOC_GO: state <= S_LOC_WAIT;
        S_LOC_WAIT: if (loc_done) begin
          if (dir == 2'd3) state <= S_REPORT;
          else begin
            dir   <= dir + 1'b1;
            state <= S_LOC_SEL;
          end
        end
        S_REPORT: begin
          if (!enable)        state <= S_IDLE;
          else if (round_dos) state <= S_SAMPLE;
          else                state <= S_WAIT;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
