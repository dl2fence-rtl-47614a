// tb_boc_normalizer - self-checking test of boc_normalizer (R = 5).
// Three frames are normalized: a random one, one whose maximum sits at the
// last pixel and an all-zero frame. Every output pixel is compared with
// floor(v * 256 / max) computed here, and the start-to-done latency with
// P*(FRAC+2)+1 cycles (2P+1 for the zero frame).
module tb_boc_normalizer;
  import dl2f_pkg::*;
  localparam int R = 5, BOC_W = 12, P = (R-1)*R;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [BOC_W-1:0] frame_in [R-1][R];
  act_t frame_out [R-1][R];
  int checks = 0, failures = 0;

  boc_normalizer #(.R(R), .BOC_W(BOC_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int kind);
    int mx, cyc;
    mx = 0;
    for (int r = 0; r < R-1; r++)
      for (int c = 0; c < R; c++) begin
        frame_in[r][c] = (kind == 2) ? '0 : BOC_W'($urandom_range(0, 3000));
        if (kind == 1) frame_in[r][c] = BOC_W'($urandom_range(0, 999));
      end
    if (kind == 1) frame_in[R-2][R-1] = 12'd1000;
    for (int r = 0; r < R-1; r++)
      for (int c = 0; c < R; c++) if (int'(frame_in[r][c]) > mx) mx = int'(frame_in[r][c]);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != ((kind == 2) ? 2*P + 1 : P*(FRAC+2) + 1)) begin
      failures++;
      $display("latency %0d", cyc);
    end
    for (int r = 0; r < R-1; r++)
      for (int c = 0; c < R; c++) begin
        automatic int e = (mx == 0) ? 0 : (int'(frame_in[r][c]) * 256) / mx;
        checks++;
        if (int'(frame_out[r][c]) != e) begin
          failures++;
          $display("pix %0d %0d got %0d exp %0d", r, c, frame_out[r][c], e);
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0); run(1); run(2); run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
