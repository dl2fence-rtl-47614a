// tb_cnn_localizer - self-checking test of cnn_localizer (R = 5, 4x5 frame).
// Random Q8.8 weights are loaded through the weight port and random
// normalized frames are segmented; every mask bit is compared with a
// reference model written here (three zero-padded 3x3 convolutions with
// ReLU, final sign test). The output bias is swept so that masks with both
// set and clear pixels occur. The run time is checked against 80*P + 1
// cycles (P = 20 pixels).
module tb_cnn_localizer;
  import dl2f_pkg::*;
  localparam int R = 5, H = R-1, W = R, P = H*W, NW = 737, AW = $clog2(NW);

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic wt_we = 0;
  logic [AW-1:0] wt_addr = '0;
  act_t wt_data = '0;
  act_t frame [H][W];
  logic [W-1:0] seg [H];
  int checks = 0, failures = 0, ones = 0, zeros = 0;
  int wv [NW];

  cnn_localizer #(.R(R)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  task automatic load(int a, int v);
    @(negedge clk); wt_we = 1; wt_addr = AW'(a); wt_data = act_t'(v); wv[a] = v;
    @(negedge clk); wt_we = 0;
  endtask

  // one zero-padded layer: out[f] = sum_ci conv(in[ci], w[f][ci]) + b[f]
  task automatic layer(input longint in [8][H][W], input int cin, input int cout,
                       input int wofs, input int bofs, input bit act,
                       output longint out [8][H][W]);
    for (int f = 0; f < cout; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          longint acc;
          acc = longint'(wv[bofs+f]) * 256;
          for (int ci = 0; ci < cin; ci++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++)
                if (y+ky-1 >= 0 && y+ky-1 < H && x+kx-1 >= 0 && x+kx-1 < W)
                  acc += longint'(wv[wofs + (f*cin+ci)*9 + ky*3 + kx]) * in[ci][y+ky-1][x+kx-1];
          out[f][y][x] = act ? ((sat16(acc >>> 8) < 0) ? 0 : sat16(acc >>> 8)) : acc;
        end
  endtask

  task automatic run_frame();
    longint a0 [8][H][W], a1 [8][H][W], a2 [8][H][W], a3 [8][H][W];
    int cyc;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        frame[r][c] = act_t'($urandom_range(0, 256));
        a0[0][r][c] = longint'(frame[r][c]);
      end
    layer(a0, 1, 8, 0, 72, 1, a1);
    layer(a1, 8, 8, 80, 656, 1, a2);
    layer(a2, 8, 1, 664, 736, 0, a3);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 80*P + 1) begin failures++; $display("latency %0d", cyc); end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        checks++;
        if (seg[y][x] != (a3[0][y][x] > 0)) begin
          failures++;
          $display("seg %0d %0d got %0b", y, x, seg[y][x]);
        end
        if (seg[y][x]) ones++; else zeros++;
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < NW; a++) load(a, $urandom_range(0, 200) - 100);
    for (int i = 0; i < 6; i++) begin
      load(736, (i - 3) * 60);
      run_frame();
    end
    checks++;
    if (ones == 0 || zeros == 0) begin failures++; $display("mask never mixed"); end
    $display("ones=%0d zeros=%0d", ones, zeros);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
