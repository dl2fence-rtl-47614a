// tb_dl2fence_ctrl - self-checking test of the round sequencer.
// The detector, normalizer and localizer are replaced by responders here
// that answer each start pulse after a random delay; the detector's
// decision per direction comes from a pattern chosen per round. Checked:
// sample-to-sample spacing equals `period` in quiet rounds and the next
// sample follows the report at once after an attack round; detection
// visits E, N, W, S in order; only abnormal directions are normalized and
// localized, each normalization before its localization; seg_we carries
// the right direction; round_dos and abn_mask match the pattern.
module tb_dl2fence_ctrl;
  localparam int PERIOD = 300;

  logic clk = 0, rst_n = 0, enable = 0;
  logic [31:0] period = PERIOD;
  logic sample, seg_clear, det_start, det_done = 0, det_dos = 0;
  logic norm_start, norm_done = 0, loc_start, loc_done = 0, seg_we;
  logic [1:0] dir;
  logic [3:0] abn_mask;
  logic result_valid, round_dos, busy;
  int checks = 0, failures = 0;
  logic [3:0] pattern;
  int det_seen, loc_seen [$], norm_seen [$];
  int cyc = 0, last_sample = -1, last_report = -1, rounds = 0, quiet = 0, attack = 0;
  bit last_dos = 0;

  dl2fence_ctrl dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // responders
  always @(posedge clk) begin
    if (det_start) begin
      checks++;
      if (int'(dir) != det_seen) begin failures++; $display("det order %0d", dir); end
      det_seen++;
      fork begin
        automatic logic [1:0] dd = dir;
        repeat ($urandom_range(2, 9)) @(posedge clk);
        det_done <= 1; det_dos <= pattern[dd];
        @(posedge clk); det_done <= 0;
      end join_none
    end
    if (norm_start) begin
      norm_seen.push_back(int'(dir));
      fork begin
        repeat ($urandom_range(2, 9)) @(posedge clk);
        norm_done <= 1; @(posedge clk); norm_done <= 0;
      end join_none
    end
    if (loc_start) begin
      checks++;
      if (norm_seen.size() == 0 || norm_seen[$] != int'(dir)) begin failures++; $display("loc without norm"); end
      fork begin
        repeat ($urandom_range(2, 9)) @(posedge clk);
        loc_done <= 1; @(posedge clk); loc_done <= 0;
      end join_none
    end
    if (seg_we) loc_seen.push_back(int'(dir));
  end

  always @(posedge clk) begin
    if (sample) begin
      if (last_sample >= 0) begin
        checks++;
        if (last_dos) begin
          if (cyc != last_report + 1) begin failures++; $display("no immediate resample"); end
        end else if (cyc - last_sample != PERIOD) begin
          failures++; $display("period %0d", cyc - last_sample);
        end
      end
      last_sample = cyc;
      det_seen = 0;
      loc_seen.delete(); norm_seen.delete();
      pattern = (rounds % 3 == 2) ? 4'b0000 : 4'($urandom);
      rounds++;
    end
    if (result_valid) begin
      automatic int k = 0;
      last_report = cyc;
      last_dos = round_dos;
      checks += 3;
      if (abn_mask != pattern) begin failures++; $display("mask %b vs %b", abn_mask, pattern); end
      if (round_dos != (pattern != 0)) begin failures++; $display("round_dos"); end
      for (int d = 0; d < 4; d++)
        if (pattern[d]) begin
          if (k >= loc_seen.size() || loc_seen[k] != d) begin failures++; $display("loc seq"); end
          k++;
        end
      if (k != loc_seen.size() || det_seen != 4) begin failures++; $display("loc/det count"); end
      if (round_dos) attack++; else quiet++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); enable = 1;
    wait (rounds == 20);
    checks++;
    if (quiet < 3 || attack < 3) begin failures++; $display("rounds quiet=%0d attack=%0d", quiet, attack); end
    $display("quiet=%0d attack=%0d", quiet, attack);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
