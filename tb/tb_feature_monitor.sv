// tb_feature_monitor - self-checking test of feature_monitor on a 4x4 mesh.
// Random VC occupancies and buffer strobes are driven for a few windows; a
// reference count per (node, port) is kept here and compared, through this
// testbench's own node-to-pixel mapping, with the sampled BOC and VCO
// frames after every sample pulse. The counters are 6 bits wide here, and
// the last window drives every strobe so that they all saturate at 63.
module tb_feature_monitor;
  import dl2f_pkg::*;
  localparam int R = 4, NUM_VC = 4, BOC_W = 6;

  logic clk = 0, rst_n = 0, sample = 0;
  logic [2:0] vc_occ [R*R][4];
  logic [3:0] buf_wr [R*R], buf_rd [R*R];
  act_t vco_frame [4][R-1][R];
  logic [BOC_W-1:0] boc_frame [4][R-1][R];
  int checks = 0, failures = 0;
  int refc [R*R][4];

  feature_monitor #(.R(R), .NUM_VC(NUM_VC), .BOC_W(BOC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // node of pixel (r,c) of direction d: E x=r, W x=r+1, N y=r, S y=r+1
  function automatic int node_of(int d, int r, int c);
    case (d)
      0: return c * R + r;
      2: return c * R + r + 1;
      1: return r * R + c;
      default: return (r + 1) * R + c;
    endcase
  endfunction

  task automatic drive_random(bit sat);
    for (int n = 0; n < R*R; n++) begin
      for (int d = 0; d < 4; d++) vc_occ[n][d] = 3'($urandom_range(0, NUM_VC));
      buf_wr[n] = sat ? 4'hf : 4'($urandom);
      buf_rd[n] = sat ? 4'hf : 4'($urandom);
    end
  endtask

  task automatic check_frames();
    for (int d = 0; d < 4; d++)
      for (int r = 0; r < R-1; r++)
        for (int c = 0; c < R; c++) begin
          automatic int n = node_of(d, r, c);
          automatic int expb = refc[n][d] > 63 ? 63 : refc[n][d];
          checks += 2;
          if (int'(boc_frame[d][r][c]) != expb) begin
            failures++;
            $display("BOC mismatch d%0d r%0d c%0d got %0d exp %0d", d, r, c, boc_frame[d][r][c], expb);
          end
          if (vco_frame[d][r][c] != act_t'(int'(vc_occ[n][d]) * 64)) begin
            failures++;
            $display("VCO mismatch d%0d r%0d c%0d", d, r, c);
          end
        end
  endtask

  initial begin
    for (int n = 0; n < R*R; n++) begin
      buf_wr[n] = '0; buf_rd[n] = '0;
      for (int d = 0; d < 4; d++) begin vc_occ[n][d] = '0; refc[n][d] = 0; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int win = 0; win < 4; win++) begin
      automatic int len = (win == 3) ? 40 : 5 + win * 7;
      for (int t = 0; t < len; t++) begin
        @(negedge clk);
        drive_random(win == 3);
        sample = (t == len - 1);
        // sample cycle's ops open the next window
        for (int n = 0; n < R*R; n++)
          for (int d = 0; d < 4; d++)
            if (!sample) refc[n][d] += int'(buf_wr[n][d]) + int'(buf_rd[n][d]);
      end
      @(posedge clk);
      #1;
      sample = 0;
      check_frames();
      for (int n = 0; n < R*R; n++)
        for (int d = 0; d < 4; d++) refc[n][d] = int'(buf_wr[n][d]) + int'(buf_rd[n][d]);
      // hold inputs stable (with zero ops) so the VCO check above saw the
      // sampled values; the first ops of the next window start below
      for (int n = 0; n < R*R; n++) begin buf_wr[n] = '0; buf_rd[n] = '0; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
