// tb_conv_engine: self-checking test of the Convolution Engine.
//
// The engine is connected to the real crossbar, TCDM and weight memory. For
// each job the testbench fills the input features, partial sums and
// coefficients with random data (TCDM through its port B, weights through
// the weight memory write port), runs the job, reads the outputs back and
// compares every output word with a reference computed here directly from
// the convolution formula (sum over features and taps, arithmetic shift,
// bias or partial sum, 16-bit saturation, ReLU, 2x2 pooling). Jobs cover
// 3x3 and 5x5 filters, with and without zero padding, bias and partial-sum
// accumulation, max, average and downsampling pooling, one and two pooling
// stages, and feature placements that collide in the TCDM banks (stalls).
// The cycle count of a conflict-free job is checked against one step per
// input word plus the fixed overheads.
module tb_conv_engine;
  import neuraghe_pkg::*;

  localparam int unsigned LW = 16;           // line buffer words (32-pixel rows)
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  ce_cfg_t cfg;
  logic start = 1'b0, busy, done, stall;
  logic [N_CE_PORT-1:0] p_req, p_we, p_gnt;
  logic [N_CE_PORT-1:0][TCDM_AW-1:0] p_addr;
  logic [N_CE_PORT-1:0][WORD_W-1:0] p_wdata, p_rdata;
  logic [N_BANKS-1:0] wm_req;
  logic [N_BANKS-1:0][WM_AW-1:0] wm_addr;
  logic [N_BANKS-1:0][PIX_W-1:0] wm_rdata;
  logic [N_BANKS-1:0] ta_req, ta_we;
  logic [N_BANKS-1:0][9:0] ta_addr;
  logic [N_BANKS-1:0][WORD_W-1:0] ta_wdata, ta_rdata;
  logic [N_BANKS-1:0] tb_req = '0, tb_we = '0;
  logic [N_BANKS-1:0][3:0] tb_be = '1;
  logic [N_BANKS-1:0][9:0] tb_addr = '0;
  logic [N_BANKS-1:0][WORD_W-1:0] tb_wdata = '0, tb_rdata;
  logic wm_wr_en = 1'b0;
  logic [11:0] wm_wr_addr = '0;
  logic [63:0] wm_wr_data = '0;

  conv_engine #(.LINE_WORDS(LW)) dut (.clk, .rst_n, .cfg, .start, .busy, .done, .stall,
    .p_req, .p_we, .p_addr, .p_wdata, .p_gnt, .p_rdata, .wm_req, .wm_addr, .wm_rdata);
  ce_xbar u_xbar (.clk, .rst_n, .p_req, .p_we, .p_addr, .p_wdata, .p_gnt, .p_rdata,
    .b_req(ta_req), .b_we(ta_we), .b_addr(ta_addr), .b_wdata(ta_wdata), .b_rdata(ta_rdata));
  tcdm u_tcdm (.clk_a(clk), .a_req(ta_req), .a_we(ta_we), .a_addr(ta_addr), .a_wdata(ta_wdata),
    .a_rdata(ta_rdata), .clk_b(clk), .b_req(tb_req), .b_we(tb_we), .b_be(tb_be), .b_addr(tb_addr),
    .b_wdata(tb_wdata), .b_rdata(tb_rdata));
  weight_memory u_wm (.clk, .wr_en(wm_wr_en), .wr_addr(wm_wr_addr), .wr_data(wm_wr_data),
    .rd_req(wm_req), .rd_addr(wm_addr), .rd_data(wm_rdata));

  int checks = 0, failures = 0, stalls = 0;
  always @(posedge clk) if (stall) stalls++;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- memory access helpers ----
  task automatic tcdm_write(input int a, input logic [31:0] d);
    tb_req = '0; tb_we = '0;
    tb_req[a % 32] = 1'b1; tb_we[a % 32] = 1'b1;
    tb_addr[a % 32] = 10'(a / 32); tb_wdata[a % 32] = d;
    @(posedge clk); #1;
    tb_req = '0; tb_we = '0;
  endtask
  task automatic tcdm_read(input int a, output logic [31:0] d);
    tb_req = '0; tb_we = '0;
    tb_req[a % 32] = 1'b1; tb_addr[a % 32] = 10'(a / 32);
    @(posedge clk); #1;
    tb_req = '0;
    d = tb_rdata[a % 32];
  endtask

  // ---- reference data ----
  int x   [12][40][32];   // input features [port][row][col]
  int yin [4][40][32];
  int wgt [16][27];
  int bia [4];
  int img [40][32];

  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  task automatic run_job(input logic fs5, input logic zp, input int W, input int H,
                         input logic use_yin, input logic relu_en, input logic [1:0] pool_en,
                         input pool_method_e meth, input int xstride, input int ystart,
                         input bit check_time);
    int p, p0, wo, ho, nf, shift, cyc, push_words, js;
    logic [31:0] d;
    p = fs5 ? 2 : 1; p0 = zp ? 0 : p; wo = W - 2*p0; ho = H - 2*p0;
    shift = 8;
    // random data
    for (int f = 0; f < 12; f++) for (int r = 0; r < H; r++) for (int cc = 0; cc < W; cc++)
      x[f][r][cc] = int'($urandom_range(1023)) - 512;
    for (int o = 0; o < 4; o++) for (int r = 0; r < ho; r++) for (int cc = 0; cc < wo; cc++)
      yin[o][r][cc] = int'($urandom_range(4095)) - 2048;
    for (int s = 0; s < 16; s++) for (int t = 0; t < 27; t++)
      wgt[s][t] = (fs5 && t >= 25) ? 0 : int'($urandom_range(511)) - 256;
    for (int o = 0; o < 4; o++) bia[o] = int'($urandom_range(2047)) - 1024;
    // configuration
    cfg = '0;
    cfg.fs5 = fs5; cfg.zp_en = zp; cfg.width = 16'(W); cfg.height = 16'(H);
    cfg.x_en = fs5 ? 12'h00f : 12'hfff; cfg.y_en = 4'hf; cfg.use_yin = use_yin;
    cfg.shift = 5'(shift); cfg.relu_en = relu_en; cfg.pool_en = pool_en; cfg.pool_method = meth;
    cfg.wm_base = 9'd3;
    for (int f = 0; f < 12; f++) cfg.x_base[f] = TCDM_AW'(f * xstride);
    for (int o = 0; o < 4; o++) begin
      cfg.yin_base[o]  = TCDM_AW'(ystart + o * 1000);
      cfg.yout_base[o] = TCDM_AW'(ystart + 500 + o * 1000);
    end
    // load TCDM
    for (int f = 0; f < 12; f++) for (int k = 0; k < H*W/2; k++)
      tcdm_write(f * xstride + k, {16'(x[f][(2*k+1)/W][(2*k+1)%W]), 16'(x[f][(2*k)/W][(2*k)%W])});
    if (use_yin)
      for (int o = 0; o < 4; o++) for (int k = 0; k < ho*wo/2; k++)
        tcdm_write(ystart + o*1000 + k, {16'(yin[o][(2*k+1)/wo][(2*k+1)%wo]), 16'(yin[o][(2*k)/wo][(2*k)%wo])});
    // load coefficients: index i at bank i%32 row 3 + i/32 -> slot (96 + i)/4
    for (int q = 0; q < 109; q++) begin
      logic [63:0] v;
      for (int k = 0; k < 4; k++) begin
        int i;
        i = 4*q + k;
        v[16*k +: 16] = (i < 432) ? 16'(wgt[i/27][i%27]) : 16'(bia[i-432]);
      end
      wm_wr_en = 1'b1; wm_wr_addr = 12'(24 + q); wm_wr_data = v;
      @(posedge clk); #1;
    end
    wm_wr_en = 1'b0;
    // run
    @(posedge clk); #1;
    start = 1'b1; @(posedge clk); #1; start = 1'b0;
    cyc = 1; js = stalls;
    while (!done) begin @(posedge clk); #1; cyc++; end
    push_words = (H + p + 1) * W / 2;
    if (check_time) begin
      // 15 cycles weight load, 2 cycles prefetch, one advance per pushed
      // word, 12 cycles pipeline drain, and a bounded cost per stall cycle
      checks++;
      if (cyc > 2 + 15 + 2 + push_words + 12 + 3 * (stalls - js) || cyc < push_words) begin
        failures++;
        $display("FAIL cycles %0d, expected about %0d", cyc, 19 + push_words);
      end
    end
    // reference and comparison
    for (int o = 0; o < 4; o++) begin
      int ow, oh, nwords;
      for (int r = 0; r < ho; r++) for (int cc = 0; cc < wo; cc++) begin
        longint acc;
        acc = 0;
        for (int l = 0; l < 4; l++)
          for (int s = 0; s < (fs5 ? 1 : 3); s++)
            for (int dr = 0; dr < 2*p+1; dr++) for (int dc = 0; dc < 2*p+1; dc++) begin
              int ir, ic, t;
              ir = r + p0 + dr - p; ic = cc + p0 + dc - p;
              t = fs5 ? (5*dr + dc) : (9*s + 3*dr + dc);
              if (ir >= 0 && ir < H && ic >= 0 && ic < W)
                acc += longint'(x[l + 4*s][ir][ic]) * longint'(wgt[o*4 + l][t]);
            end
        img[r][cc] = sat((acc >>> shift) + (use_yin ? yin[o][r][cc] : bia[o]));
        if (relu_en && img[r][cc] < 0) img[r][cc] = 0;
      end
      ow = wo; oh = ho;
      for (int st = 0; st < 2; st++) if (pool_en[st]) begin
        for (int r = 0; r < oh/2; r++) for (int cc = 0; cc < ow/2; cc++) begin
          int a, b, e, f, v;
          a = img[2*r][2*cc]; b = img[2*r][2*cc+1]; e = img[2*r+1][2*cc]; f = img[2*r+1][2*cc+1];
          case (meth)
            POOL_MAX: begin v = a; if (b > v) v = b; if (e > v) v = e; if (f > v) v = f; end
            POOL_AVG: v = (a + b + e + f) >>> 2;
            default:  v = a;
          endcase
          img[r][cc] = v;
        end
        ow /= 2; oh /= 2;
      end
      nwords = ow * oh / 2;
      for (int k = 0; k < nwords; k++) begin
        logic [31:0] exp_w;
        exp_w = {16'(img[(2*k+1)/ow][(2*k+1)%ow]), 16'(img[(2*k)/ow][(2*k)%ow])};
        tcdm_read(ystart + 500 + o*1000 + k, d);
        checks++;
        if (d !== exp_w) begin
          failures++;
          if (failures < 10) $display("FAIL out %0d word %0d: got %h expected %h", o, k, d, exp_w);
        end
      end
    end
    $display("job fs5=%0d zp=%0d %0dx%0d yin=%0d relu=%0d pool=%b/%0d: %0d cycles, stalls so far %0d",
             fs5, zp, H, W, use_yin, relu_en, pool_en, meth, cyc, stalls);
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // xstride 97 keeps the 12 features of one word index in different banks;
    // the y_out writes still collide now and then
    run_job(1'b0, 1'b1,  8,  6, 1'b0, 1'b0, 2'b00, POOL_MAX, 97,  5000, 1'b1);
    run_job(1'b1, 1'b0, 12,  8, 1'b0, 1'b1, 2'b01, POOL_MAX, 97,  5000, 1'b1);
    run_job(1'b0, 1'b0, 18, 10, 1'b1, 1'b0, 2'b11, POOL_AVG, 97,  5000, 1'b0);
    run_job(1'b1, 1'b1, 16,  8, 1'b0, 1'b1, 2'b01, POOL_DWN, 97,  5000, 1'b0);
    // xstride 64 puts all features in one bank: every word stalls
    begin
      int s0;
      s0 = stalls;
      run_job(1'b0, 1'b1, 8, 4, 1'b1, 1'b1, 2'b00, POOL_MAX, 64, 5000, 1'b0);
      checks++;
      if (stalls == s0) begin failures++; $display("FAIL no stall seen with bank conflicts"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
