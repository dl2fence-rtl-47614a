// tb_dl2fence_top - end-to-end test of dl2fence_top at its default size
// (16 x 16 mesh, 4 VCs per port).
//
// Traffic model: background traffic occupies at most one VC of a port and
// strobes its buffer with probability 1/8 per cycle; a flood from an
// attacker to a victim, routed XY by the flood_path helper, fills every VC
// of each port it enters and writes and reads that buffer every cycle.
// The CNNs get hand-made weights that turn them into threshold detectors:
// detector kernel 0 = centre tap 1.0, bias -0.5, dense weights 1.0 on that
// channel, bias -0.25 (a frame is abnormal when some interior port holds
// more than half its VCs); localizer = relu(x - 0.5) passed through, so a
// pixel is a victim when its normalized BOC exceeds one half.
//
// Scenarios, each checked on a round whose whole BOC window saw it:
//   quiet        no attack: no detection, next sample after `period`
//   single       one attacker, L-shaped route: victims = route, attacker
//                and target victim found, next round sampled at once
//   gap + VCE    one route port reports background-level counts: without
//                VCE that victim is missing, with VCE it is restored
//   two          two attackers in the victim's row (E & W frames): both
//                IDs reported, multi_attacker set
//   quiet again  back to periodic monitoring
// Each mechanism is counted; one that never happened is a failure.
module tb_dl2fence_top;
  import dl2f_pkg::*;
  import flood_path::*;
  localparam int R = 16, NUM_VC = 4, PERIOD = 9000;

  logic clk = 0, rst_n = 0, enable = 0, vce_en = 0;
  logic [31:0] period = PERIOD;
  logic [2:0] vc_occ [R*R][4];
  logic [3:0] buf_wr [R*R], buf_rd [R*R];
  logic det_wt_we = 0, loc_wt_we = 0;
  logic [8:0] det_wt_addr = '0;
  logic [9:0] loc_wt_addr = '0;
  act_t det_wt_data = '0, loc_wt_data = '0;
  logic result_valid, dos_detected, tv_valid, multi_attacker, vce_applied, busy;
  logic [3:0] abn_dirs, seg_dirs;
  logic [R*R-1:0] victims;
  node_id_t tv_id, attacker_id [3];
  logic [2:0] attacker_valid;

  dl2fence_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_quiet = 0, n_periodic = 0, n_single = 0, n_resample = 0, n_vce_fill = 0,
      n_gap_seen = 0, n_multi = 0, n_localize = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ traffic
  bit fl [4][RMAX*RMAX];      // ports currently flooded
  bit weakp [4][RMAX*RMAX];    // flooded ports that report background counts
  always @(negedge clk) begin
    for (int n = 0; n < R*R; n++) begin
      for (int d = 0; d < 4; d++) begin
        vc_occ[n][d] = fl[d][n] ? 3'd4 : 3'($urandom_range(0, 7) == 0);
        buf_wr[n][d] = (fl[d][n] && !weakp[d][n]) ? 1'b1 : ($urandom_range(0, 7) == 0);
        buf_rd[n][d] = (fl[d][n] && !weakp[d][n]) ? 1'b1 : ($urandom_range(0, 7) == 0);
      end
    end
  end

  task automatic clear_flood();
    for (int d = 0; d < 4; d++)
      for (int n = 0; n < RMAX*RMAX; n++) begin fl[d][n] = 0; weakp[d][n] = 0; end
  endtask

  task automatic add_flood(int a, int v, output bit rt [RMAX*RMAX]);
    bit h [4][RMAX*RMAX];
    xy_flood(R, a, v, h, rt);
    for (int d = 0; d < 4; d++)
      for (int n = 0; n < R*R; n++) fl[d][n] |= h[d][n];
  endtask

  // ------------------------------------------------------------ weights
  task automatic det_w(int a, int v);
    @(negedge clk); det_wt_we = 1; det_wt_addr = 9'(a); det_wt_data = act_t'(v);
  endtask
  task automatic loc_w(int a, int v);
    @(negedge clk); loc_wt_we = 1; loc_wt_addr = 10'(a); loc_wt_data = act_t'(v);
  endtask

  task automatic load_weights();
    localparam int NFL = ((R-3)/2) * ((R-2)/2) * 8;
    for (int a = 0; a < 81 + NFL; a++) begin
      int v;
      v = 0;
      if (a == 4) v = 256;                          // kernel 0 centre tap
      if (a == 72) v = -128;                        // kernel 0 bias
      if (a >= 80 && a < 80 + NFL && (a - 80) % 8 == 0) v = 256;
      if (a == 80 + NFL) v = -64;                   // dense bias
      det_w(a, v);
    end
    @(negedge clk); det_wt_we = 0;
    for (int a = 0; a < 737; a++) begin
      int v;
      v = 0;
      if (a == 4) v = 256;                // layer 1 kernel 0 centre
      if (a == 72) v = -128;              // layer 1 bias 0
      if (a == 80 + 4) v = 256;           // layer 2 kernel 0, channel 0
      if (a == 664 + 4) v = 256;          // layer 3 channel 0
      loc_w(a, v);
    end
    @(negedge clk); loc_wt_we = 0;
  endtask

  // ------------------------------------------------------------ rounds
  longint last_sample = -1, last_report = -1, sample_gap = 0;
  bit prev_dos = 0;
  always @(posedge clk) begin
    if (dut.u_ctrl.sample) begin
      sample_gap = cyc - last_sample;
      if (last_sample >= 0 && prev_dos && cyc == last_report + 1) n_resample++;
      last_sample = cyc;
    end
    if (dut.u_ctrl.result_valid) begin
      last_report = cyc;
      prev_dos = dut.u_ctrl.round_dos;
      if (dut.u_ctrl.round_dos) n_localize += $countones(dut.u_ctrl.abn_mask);
    end
  end

  task automatic next_result();
    @(posedge clk);
    while (!result_valid) @(posedge clk);
    #1;
  endtask

  // skip the round already running, return the next full one
  task automatic settle();
    next_result();
    next_result();
  endtask

  task automatic expect_quiet(string tag);
    checks += 2;
    if (dos_detected || abn_dirs != 0) begin failures++; $display("%s: false detection %b", tag, abn_dirs); end
    else n_quiet++;
    if (sample_gap != PERIOD) begin failures++; $display("%s: sample gap %0d", tag, sample_gap); end
    else n_periodic++;
  endtask

  task automatic expect_single(string tag, int a, int v, bit rt [RMAX*RMAX]);
    logic [R*R-1:0] ev;
    for (int n = 0; n < R*R; n++) ev[n] = rt[n];
    checks += 4;
    if (!dos_detected) begin failures++; $display("%s: not detected", tag); end
    if (victims !== ev) begin failures++; $display("%s: victims differ", tag); end
    if (!(attacker_valid == 3'b001 && int'(attacker_id[0]) == a)) begin
      failures++; $display("%s: attacker %0d exp %0d", tag, attacker_id[0], a);
    end
    if (!(tv_valid && int'(tv_id) == v)) begin failures++; $display("%s: tv %0d exp %0d", tag, tv_id, v); end
    if (dos_detected && victims === ev && int'(attacker_id[0]) == a) n_single++;
  endtask

  initial begin
    bit rt [RMAX*RMAX], rt2 [RMAX*RMAX];
    int a, v, a2, gapn;
    clear_flood();
    repeat (5) @(posedge clk);
    rst_n = 1;
    load_weights();
    @(negedge clk); enable = 1;

    // quiet
    settle();
    expect_quiet("quiet");

    // single attacker: (12,10) -> (4,3): west along row 10, then to lower y
    a = 10*R + 12; v = 3*R + 4;
    add_flood(a, v, rt);
    settle();
    expect_single("single", a, v, rt);
    next_result();
    expect_single("single-2", a, v, rt);

    // weak port in the middle of the X segment: (8,10) east port
    gapn = 10*R + 8;
    weakp[0][gapn] = 1;
    vce_en = 0;
    settle();
    checks += 2;
    if (victims[gapn]) begin failures++; $display("gap: weak port still segmented"); end
    else n_gap_seen++;
    if (!(attacker_valid == 3'b001 && int'(attacker_id[0]) == a)) begin failures++; $display("gap: attacker"); end
    vce_en = 1;
    next_result();
    expect_single("vce", a, v, rt);
    checks++;
    if (!vce_applied || !victims[gapn]) begin failures++; $display("vce: gap not filled"); end
    else n_vce_fill++;

    // two attackers in the victim's row: (13,6) and (1,6) -> (7,6)
    clear_flood();
    a = 6*R + 13; a2 = 6*R + 1; v = 6*R + 7;
    add_flood(a, v, rt);
    add_flood(a2, v, rt2);
    settle();
    checks += 2;
    if (abn_dirs != 4'b0101) begin failures++; $display("two: abn %b", abn_dirs); end
    if (multi_attacker && attacker_valid == 3'b011 &&
        ((int'(attacker_id[0]) == a2 && int'(attacker_id[1]) == a) ||
         (int'(attacker_id[0]) == a && int'(attacker_id[1]) == a2))) n_multi++;
    else begin failures++; $display("two: ids %0d %0d", attacker_id[0], attacker_id[1]); end

    // attack stops
    clear_flood();
    settle();
    next_result();
    expect_quiet("quiet-again");

    checks += 8;
    if (n_quiet < 2)    begin failures++; $display("quiet rounds never seen"); end
    if (n_periodic < 2) begin failures++; $display("periodic sampling never seen"); end
    if (n_single < 3)   begin failures++; $display("single-attacker rounds missing"); end
    if (n_resample < 1) begin failures++; $display("immediate resample never seen"); end
    if (n_gap_seen < 1) begin failures++; $display("segmentation gap never seen"); end
    if (n_vce_fill < 1) begin failures++; $display("VCE fill never seen"); end
    if (n_multi < 1)    begin failures++; $display("multi-attacker never seen"); end
    if (n_localize < 1) begin failures++; $display("localization never run"); end
    $display("quiet=%0d periodic=%0d single=%0d resample=%0d gap=%0d vce=%0d multi=%0d localized_frames=%0d cycles=%0d",
             n_quiet, n_periodic, n_single, n_resample, n_gap_seen, n_vce_fill, n_multi, n_localize, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
