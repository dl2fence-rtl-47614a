// tb_cnn_detector - self-checking test of cnn_detector (R = 8: 7x8 input,
// 5x6x8 convolution map, 2x3x8 pooled, 48 dense inputs).
// Random Q8.8 weights are loaded through the weight port, random VCO-like
// frames are classified, and the logit and DoS flag are compared with a
// reference model written here with plain integer arithmetic (conv, ReLU,
// 2x2 max-pool, channel-fastest flatten, dense). Frames are run with the
// dense bias swept so that both decisions occur. The run time is checked
// against 8*CH*CW + NFL + 2 cycles.
module tb_cnn_detector;
  import dl2f_pkg::*;
  localparam int R = 8, H = R-1, W = R, CH = H-2, CW = W-2, PH = CH/2, PW = CW/2;
  localparam int NFL = PH*PW*8, NW = 81 + NFL, AW = $clog2(NW);

  logic clk = 0, rst_n = 0, start = 0, busy, done, dos;
  logic wt_we = 0;
  logic [AW-1:0] wt_addr = '0;
  act_t wt_data = '0, logit;
  act_t frame [H][W];
  int checks = 0, failures = 0, n_dos = 0, n_ok = 0;
  int wv [NW];

  cnn_detector #(.R(R)) dut (.*);
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

  task automatic run_frame();
    longint cm [8][CH][CW];
    longint acc, lg;
    int cyc;
    bit edos;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) frame[r][c] = act_t'($urandom_range(0, 256));
    for (int f = 0; f < 8; f++)
      for (int y = 0; y < CH; y++)
        for (int x = 0; x < CW; x++) begin
          acc = longint'(wv[72+f]) * 256;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              acc += longint'(wv[f*9+ky*3+kx]) * longint'(frame[y+ky][x+kx]);
          acc = sat16(acc >>> 8);
          cm[f][y][x] = acc < 0 ? 0 : acc;
        end
    acc = longint'(wv[80+NFL]) * 256;
    for (int py = 0; py < PH; py++)
      for (int px = 0; px < PW; px++)
        for (int f = 0; f < 8; f++) begin
          longint m;
          m = cm[f][2*py][2*px];
          if (cm[f][2*py][2*px+1] > m) m = cm[f][2*py][2*px+1];
          if (cm[f][2*py+1][2*px] > m) m = cm[f][2*py+1][2*px];
          if (cm[f][2*py+1][2*px+1] > m) m = cm[f][2*py+1][2*px+1];
          acc += longint'(wv[80 + (py*PW+px)*8 + f]) * m;
        end
    edos = acc > 0;
    lg = sat16(acc >>> 8);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 3;
    if (cyc != 8*CH*CW + NFL + 2) begin failures++; $display("latency %0d", cyc); end
    if (dos != edos) begin failures++; $display("dos got %0b exp %0b", dos, edos); end
    if (longint'(logit) != lg) begin failures++; $display("logit got %0d exp %0d", logit, lg); end
    if (edos) n_dos++; else n_ok++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < NW; a++) load(a, $urandom_range(0, 160) - 64);
    for (int i = 0; i < 8; i++) begin
      load(80 + NFL, (i - 4) * 120);   // sweep the dense bias
      run_frame();
    end
    checks++;
    if (n_dos == 0 || n_ok == 0) begin failures++; $display("one decision never occurred"); end
    $display("dos=%0d normal=%0d", n_dos, n_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
