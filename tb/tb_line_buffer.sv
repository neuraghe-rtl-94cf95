// tb_line_buffer: self-checking test of the reconfigurable line buffer.
//
// Random images are streamed in, one word (two pixels) per advance, with
// random gaps in en, followed by the zero words that flush the last rows
// ((H + p + 1) * W / 2 words in total, p the filter half-size), exactly as
// the CE controller does. After every advance with win_valid set, both
// windows are compared tap by tap with the image around the output position
// given by win_row / win_col (3x3: three independent streams; 5x5: one
// stream, taps 25 and 26 zero; pixels outside the image zero when padding).
// The windows must visit every output pair exactly once, in raster order, so
// the number of valid advances is Hout * Wout / 2.
module tb_line_buffer;
  import neuraghe_pkg::*;

  localparam int LW = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, en = 1'b0, fs5 = 1'b0, zp_en = 1'b0, win_valid;
  logic [15:0] width = '0, height = '0, win_row, win_col;
  logic [2:0][WORD_W-1:0] din = '0;
  win_t win_a, win_b;
  line_buffer #(.LINE_WORDS(LW)) dut (.clk, .rst_n, .start, .en, .fs5, .zp_en, .width, .height,
    .din, .win_a, .win_b, .win_valid, .win_row, .win_col);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int img [3][24][32];

  function automatic int px(input int s, input int r, input int c, input int H, input int W);
    if (r < 0 || r >= H || c < 0 || c >= W) return 0;
    return img[s][r][c];
  endfunction

  task automatic run(input logic f5, input logic zp, input int W, input int H);
    int p, p0, wo, ho, n_valid, exp_r, exp_c, push;
    p = f5 ? 2 : 1; p0 = zp ? 0 : p; wo = W - 2*p0; ho = H - 2*p0;
    for (int s = 0; s < 3; s++) for (int r = 0; r < H; r++) for (int c = 0; c < W; c++)
      img[s][r][c] = int'($urandom_range(65535)) - 32768;
    @(posedge clk); #1;
    fs5 = f5; zp_en = zp; width = 16'(W); height = 16'(H); start = 1'b1;
    @(posedge clk); #1 start = 1'b0;
    n_valid = 0; exp_r = 0; exp_c = 0;
    push = (H + p + 1) * W / 2;
    for (int k = 0; k < push; k++) begin
      while ($urandom_range(3) == 0) begin en = 1'b0; din = {$urandom, $urandom, $urandom}; @(posedge clk); #1; end
      en = 1'b1;
      for (int s = 0; s < 3; s++)
        din[s] = (k < H*W/2) ? {16'(img[s][(2*k+1)/W][(2*k+1)%W]), 16'(img[s][(2*k)/W][(2*k)%W])} : '0;
      @(posedge clk); #1;
      en = 1'b0;
      if (win_valid) begin
        int r, c;
        n_valid++;
        r = int'(win_row); c = int'(win_col);
        checks++;
        if (r != exp_r || c != exp_c) begin
          failures++;
          if (failures < 10) $display("FAIL position %0d,%0d expected %0d,%0d", r, c, exp_r, exp_c);
        end
        exp_c += 2;
        if (exp_c >= wo) begin exp_c = 0; exp_r++; end
        for (int h = 0; h < 2; h++) begin
          win_t e;
          e = '0;
          for (int dr = 0; dr < 2*p+1; dr++) for (int dc = 0; dc < 2*p+1; dc++)
            if (f5) e[5*dr + dc] = 16'(px(0, r + p0 + dr - p, c + h + p0 + dc - p, H, W));
            else for (int s = 0; s < 3; s++)
              e[9*s + 3*dr + dc] = 16'(px(s, r + p0 + dr - p, c + h + p0 + dc - p, H, W));
          checks++;
          if ((h == 0 ? win_a : win_b) !== e) begin
            failures++;
            if (failures < 10) $display("FAIL fs5=%0d zp=%0d window %0d at %0d,%0d", f5, zp, h, r, c);
          end
        end
      end
    end
    checks++;
    if (n_valid != ho * wo / 2) begin
      failures++;
      $display("FAIL fs5=%0d zp=%0d %0dx%0d: %0d window pairs, expected %0d", f5, zp, H, W, n_valid, ho*wo/2);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    run(1'b0, 1'b0, 8, 6);
    run(1'b0, 1'b1, 8, 6);
    run(1'b1, 1'b0, 12, 8);
    run(1'b1, 1'b1, 12, 8);
    run(1'b0, 1'b1, 32, 5);
    run(1'b1, 1'b1, 32, 6);
    run(1'b0, 1'b0, 20, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
