// dl2fence_top - DL2Fence: CNN-based flooding-DoS detection and localization
// for an R x R mesh NoC with XY routing.
//
// The block watches the input ports of every router (VC occupancy and
// buffer read/write strobes) and, round by round:
//   feature_monitor  samples the VCO and BOC frames of the four directions,
//   cnn_detector     classifies each VCO frame (abnormal or not),
//   boc_normalizer + cnn_localizer  segment the BOC frame of every abnormal
//                    direction into a mask of flooded routers,
//   mff_fusion       pads and fuses the masks into one victim map,
//   vce_xy           optionally completes the route by XY routing (vce_en),
//   tlm_locator      derives attacker IDs with the Table-Like Method,
//   dl2fence_ctrl    sequences all of this.
// One detector and one localizer serve the whole mesh; nothing is added to
// the routers beyond the port counters.
//
// Interface
//   vc_occ/buf_wr/buf_rd  per node and input port (index = node ID, then
//                         direction E=0,N=1,W=2,S=3), see feature_monitor
//   enable, period        start monitoring; cycles between samples
//   vce_en                enable victim completion
//   det_wt_*, loc_wt_*    weight load ports of the two CNNs (see their maps)
//   result_valid          one-cycle pulse at the end of every round; the
//                         result outputs below then hold until the next one
//   dos_detected          some VCO frame was abnormal in that round
//   abn_dirs              detector flag per direction
//   seg_dirs              directions whose segmentation found victims
//   victims               bit n = node n is a victim (after VCE)
//   tv_id/tv_valid        target victim of a single-attacker pattern
//   attacker_id/_valid    up to three attacker IDs from the TLM
//   multi_attacker        the TLM predicts >= 2 attackers (more rounds)
//   vce_applied           the VCE changed or confirmed the route
//   busy                  a round is in progress
// Timing: a round with no abnormal frame takes about 4 detector runs
// (4 x 1794 cycles at R = 16); every abnormal direction adds one normalizer
// and one localizer run (about 2400 + 19200 cycles at R = 16).
module dl2fence_top
  import dl2f_pkg::*;
#(
  parameter int unsigned R      = 16,
  parameter int unsigned NUM_VC = 4,
  parameter int unsigned BOC_W  = 20,
  localparam int unsigned VCW   = $clog2(NUM_VC + 1),
  localparam int unsigned DAW   = $clog2(NCH*9 + NCH + ((R-3)/2)*((R-2)/2)*NCH + 1),
  localparam int unsigned LAW   = $clog2(737)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enable,
  input  logic [31:0]      period,
  input  logic             vce_en,
  input  logic [VCW-1:0]   vc_occ [R*R][4],
  input  logic [3:0]       buf_wr [R*R],
  input  logic [3:0]       buf_rd [R*R],
  input  logic             det_wt_we,
  input  logic [DAW-1:0]   det_wt_addr,
  input  act_t             det_wt_data,
  input  logic             loc_wt_we,
  input  logic [LAW-1:0]   loc_wt_addr,
  input  act_t             loc_wt_data,
  output logic             result_valid,
  output logic             dos_detected,
  output logic [3:0]       abn_dirs,
  output logic [3:0]       seg_dirs,
  output logic [R*R-1:0]   victims,
  output logic             tv_valid,
  output node_id_t         tv_id,
  output node_id_t         attacker_id [3],
  output logic [2:0]       attacker_valid,
  output logic             multi_attacker,
  output logic             vce_applied,
  output logic             busy
);

  // ---------------- feature frames
  logic             sample;
  act_t             vco_frame [4][R-1][R];
  logic [BOC_W-1:0] boc_frame [4][R-1][R];

  feature_monitor #(.R(R), .NUM_VC(NUM_VC), .BOC_W(BOC_W)) u_mon (
    .clk, .rst_n, .vc_occ, .buf_wr, .buf_rd, .sample,
    .vco_frame, .boc_frame
  );

  // ---------------- sequencer
  logic       seg_clear, seg_we;
  logic [1:0] dir;
  logic       det_start, det_done, det_dos;
  logic       norm_start, norm_done, loc_start, loc_done;
  logic [3:0] abn_mask;
  logic       round_valid, round_dos;
  logic       det_busy, norm_busy, loc_busy;
  act_t       det_logit;

  dl2fence_ctrl #(.PW(32)) u_ctrl (
    .clk, .rst_n, .enable, .period,
    .sample, .seg_clear, .dir,
    .det_start, .det_done, .det_dos,
    .norm_start, .norm_done, .loc_start, .loc_done,
    .seg_we, .abn_mask,
    .result_valid(round_valid), .round_dos, .busy
  );

  // ---------------- detector on the VCO frame of direction `dir`
  act_t det_frame [R-1][R];
  always_comb
    for (int r = 0; r < R - 1; r++)
      for (int c = 0; c < R; c++) det_frame[r][c] = vco_frame[dir][r][c];

  cnn_detector #(.R(R)) u_det (
    .clk, .rst_n,
    .wt_we(det_wt_we), .wt_addr(det_wt_addr), .wt_data(det_wt_data),
    .start(det_start), .frame(det_frame),
    .busy(det_busy), .done(det_done), .dos(det_dos), .logit(det_logit)
  );

  // ---------------- normalizer + localizer on the BOC frame of `dir`
  logic [BOC_W-1:0] boc_sel [R-1][R];
  act_t             norm_frame [R-1][R];
  logic [R-1:0]     loc_seg [R-1];

  always_comb
    for (int r = 0; r < R - 1; r++)
      for (int c = 0; c < R; c++) boc_sel[r][c] = boc_frame[dir][r][c];

  boc_normalizer #(.R(R), .BOC_W(BOC_W)) u_norm (
    .clk, .rst_n, .start(norm_start), .frame_in(boc_sel),
    .frame_out(norm_frame), .busy(norm_busy), .done(norm_done)
  );

  cnn_localizer #(.R(R)) u_loc (
    .clk, .rst_n,
    .wt_we(loc_wt_we), .wt_addr(loc_wt_addr), .wt_data(loc_wt_data),
    .start(loc_start), .frame(norm_frame),
    .busy(loc_busy), .done(loc_done), .seg(loc_seg)
  );

  // ---------------- handshake rules: a unit is started only while idle, and
  // the sequencer never has two units running at once
  a_det_idle:  assert property (@(posedge clk) disable iff (!rst_n) det_start  |-> !det_busy);
  a_norm_idle: assert property (@(posedge clk) disable iff (!rst_n) norm_start |-> !norm_busy);
  a_loc_idle:  assert property (@(posedge clk) disable iff (!rst_n) loc_start  |-> !loc_busy);
  a_one_unit:  assert property (@(posedge clk) disable iff (!rst_n)
                                $onehot0({det_busy, norm_busy, loc_busy}));

  // ---------------- segmentation store
  logic [R-1:0] seg_r [4][R-1];
  logic [3:0]   seg_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seg_valid <= '0;
      for (int d = 0; d < 4; d++)
        for (int r = 0; r < R - 1; r++) seg_r[d][r] <= '0;
    end else if (seg_clear) begin
      seg_valid <= '0;
    end else if (seg_we) begin
      seg_valid[dir] <= 1'b1;
      for (int r = 0; r < R - 1; r++) seg_r[dir][r] <= loc_seg[r];
    end
  end

  // ---------------- fusion, completion, attacker table
  logic [R*R-1:0] mff_victims, vce_victims;
  logic [3:0]     dir_hit;
  node_id_t       min_id [4], max_id [4];
  logic           vce_app, vce_tv_valid, tlm_single, tlm_multi;
  node_id_t       vce_tv, vce_psrc;
  node_id_t       tlm_id [3];
  logic [2:0]     tlm_valid;

  mff_fusion #(.R(R)) u_mff (
    .seg(seg_r), .seg_valid, .victims(mff_victims),
    .dir_hit, .min_id, .max_id
  );

  vce_xy #(.R(R)) u_vce (
    .en(vce_en), .victims_in(mff_victims), .dir_hit, .min_id, .max_id,
    .victims_out(vce_victims), .applied(vce_app),
    .tv_valid(vce_tv_valid), .tv_id(vce_tv), .psrc_id(vce_psrc)
  );

  tlm_locator #(.R(R)) u_tlm (
    .dir_hit, .min_id, .max_id,
    .att_id(tlm_id), .att_valid(tlm_valid),
    .single(tlm_single), .multi(tlm_multi)
  );

  // ---------------- result registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      result_valid   <= 1'b0;
      dos_detected   <= 1'b0;
      abn_dirs       <= '0;
      seg_dirs       <= '0;
      victims        <= '0;
      tv_valid       <= 1'b0;
      tv_id          <= '0;
      attacker_id    <= '{default: '0};
      attacker_valid <= '0;
      multi_attacker <= 1'b0;
      vce_applied    <= 1'b0;
    end else begin
      result_valid <= round_valid;
      if (round_valid) begin
        dos_detected   <= round_dos;
        abn_dirs       <= abn_mask;
        seg_dirs       <= dir_hit;
        victims        <= vce_victims;
        tv_valid       <= vce_tv_valid;
        tv_id          <= vce_tv;
        attacker_id    <= tlm_id;
        attacker_valid <= tlm_valid;
        multi_attacker <= tlm_multi;
        vce_applied    <= vce_app;
      end
    end
  end

endmodule
