// feature_monitor - builds the directional VCO and BOC feature frames.
//
// For every existing router input port of an R x R mesh it keeps a Buffer
// Operation Count (BOC): the number of buffer writes plus reads seen since
// the previous sample, saturating at 2**BOC_W-1. On a one-cycle `sample`
// pulse it copies, for all ports at once,
//   * the Virtual Channel Occupancy (VCO) = occupied VCs / NUM_VC, as an
//     unsigned Q8.8 value in [0, 1], into vco_frame, and
//   * the BOC counter into boc_frame,
// and restarts every BOC window (the operations of the sample cycle itself
// open the new window). Frames follow the (R-1) x R layout of dl2f_pkg, so
// ports that do not exist on the mesh border are never stored.
//
// Interface: vc_occ[node][dir] is the number of occupied VCs of that input
// port; buf_wr[node][dir] / buf_rd[node][dir] pulse once per flit written to
// or read from its buffer. Frames change only in the cycle after `sample`.
//
// Following the paper: VCO as the occupied/total VC ratio, BOC as counted
// buffer writes/reads, (R-1) x R frames. This design's choices: windowed
// (per-sample) BOC, the counter width and the Q8.8 encoding.
module feature_monitor
  import dl2f_pkg::*;
#(
  parameter int unsigned R      = 16,
  parameter int unsigned NUM_VC = 4,
  parameter int unsigned BOC_W  = 20,
  localparam int unsigned VCW   = $clog2(NUM_VC + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [VCW-1:0]   vc_occ   [R*R][4],
  input  logic [3:0]       buf_wr   [R*R],
  input  logic [3:0]       buf_rd   [R*R],
  input  logic             sample,
  output act_t             vco_frame [4][R-1][R],
  output logic [BOC_W-1:0] boc_frame [4][R-1][R]
);

  logic [BOC_W-1:0] cnt [4][R-1][R];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < 4; d++)
        for (int r = 0; r < R - 1; r++)
          for (int c = 0; c < R; c++) begin
            cnt[d][r][c]       <= '0;
            vco_frame[d][r][c] <= '0;
            boc_frame[d][r][c] <= '0;
          end
    end else begin
      for (int d = 0; d < 4; d++)
        for (int r = 0; r < R - 1; r++)
          for (int c = 0; c < R; c++) begin
            automatic int          n   = int'(pix2node(d[1:0], r, c, R));
            automatic logic [1:0]  ops = {1'b0, buf_wr[n][d]} + {1'b0, buf_rd[n][d]};
            automatic logic [BOC_W:0] base = sample ? '0 : {1'b0, cnt[d][r][c]};
            automatic logic [BOC_W:0] nxt  = base + (BOC_W+1)'(ops);
            cnt[d][r][c] <= nxt[BOC_W] ? '1 : nxt[BOC_W-1:0];
            if (sample) begin
              vco_frame[d][r][c] <= act_t'((32'(vc_occ[n][d]) << FRAC) / NUM_VC);
              boc_frame[d][r][c] <= cnt[d][r][c];
            end
          end
    end
  end

endmodule
