// tb_pooling: self-checking test of one 2x2 pooling stage.
//
// A random image (width W, height H, two pixels per word, rows in order) is
// streamed with random gaps in in_valid and in en; the output words are
// collected and compared with max, average (sum >>> 2) and downsampling
// pooling computed here. The number of output words must be W*H/8 and the
// last one must leave one advance after the last input word. Also checked:
// pass-through when the stage is disabled, and two images in a row separated
// by start.
module tb_pooling;
  import neuraghe_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, en = 1'b0, enable = 1'b0, in_valid = 1'b0, out_valid;
  pool_method_e method = POOL_MAX;
  logic [15:0] width = '0;
  logic [WORD_W-1:0] din = '0, dout;
  pooling #(.MAX_PAIRS(64)) dut (.clk, .rst_n, .start, .en, .enable, .method, .width, .in_valid,
                                 .din, .out_valid, .dout);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int img [16][128];
  logic [WORD_W-1:0] got [$];
  always @(posedge clk) if (rst_n && en && out_valid) got.push_back(dout);

  task automatic run(input int W, input int H, input logic ena, input pool_method_e m);
    int last_in, n_exp;
    got.delete();
    @(posedge clk); #1;
    start = 1'b1; enable = ena; method = m; width = 16'(W);
    @(posedge clk); #1 start = 1'b0;
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) img[r][c] = int'($urandom_range(65535)) - 32768;
    for (int k = 0; k < W*H/2; k++) begin
      while ($urandom_range(3) == 0) begin
        en = 1'($urandom); in_valid = 1'b0; din = $urandom;
        @(posedge clk); #1;
      end
      en = 1'b1; in_valid = 1'b1;
      din = {16'(img[(2*k+1)/W][(2*k+1)%W]), 16'(img[(2*k)/W][(2*k)%W])};
      @(posedge clk); #1;
    end
    // one more advance moves the last result out of the output register
    en = 1'b1; in_valid = 1'b0;
    @(posedge clk); #1;
    n_exp = ena ? W*H/8 : W*H/2;
    checks++;
    if (got.size() != n_exp) begin
      failures++;
      $display("FAIL W=%0d H=%0d en=%0d: %0d output words, expected %0d", W, H, ena, got.size(), n_exp);
    end
    for (int k = 0; k < n_exp && k < got.size(); k++) begin
      logic [WORD_W-1:0] e;
      if (!ena) e = {16'(img[(2*k+1)/W][(2*k+1)%W]), 16'(img[(2*k)/W][(2*k)%W])};
      else
        for (int j = 0; j < 2; j++) begin
          int q, r, c, a, b, cc, d, v;
          q = 2*k + j; r = 2 * (q / (W/2)); c = 2 * (q % (W/2));
          a = img[r][c]; b = img[r][c+1]; cc = img[r+1][c]; d = img[r+1][c+1];
          case (m)
            POOL_MAX: begin v = a; if (b > v) v = b; if (cc > v) v = cc; if (d > v) v = d; end
            POOL_AVG: v = (a + b + cc + d) >>> 2;
            default:  v = a;
          endcase
          e[16*j +: 16] = 16'(v);
        end
      checks++;
      if (got[k] !== e) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d: got %h expected %h", k, got[k], e);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    run(8, 4, 1'b1, POOL_MAX);
    run(16, 6, 1'b1, POOL_AVG);
    run(12, 8, 1'b1, POOL_DWN);
    run(128, 4, 1'b1, POOL_MAX);
    run(8, 2, 1'b0, POOL_MAX);
    run(20, 6, 1'b1, POOL_AVG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
