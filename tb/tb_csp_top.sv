// tb_csp_top: end-to-end test of the CSP at its default (full) size.
//
// The testbench plays the host: through the general-purpose master port it
// writes the instruction memory, programs the DMAs and the CE through the
// control registers and polls the sticky done flags. A behavioural DDR
// (64-bit words, AXI read and write slaves with random ready/valid gaps)
// serves the activation DMA on the low-speed clock and the weight DMA on the
// high-speed clock (70 / 140 MHz ratio 1:2 here). The micro-controller's
// ports are driven too: instruction fetches of the words the host wrote, and
// data writes of characters to the standard-output register and of the host
// notification.
//
// Three convolution jobs run end to end: coefficients DDR -> weight memory
// (weight DMA), features and partial sums DDR -> TCDM (activation DMA load),
// CE job, outputs TCDM -> DDR (activation DMA store); the outputs in DDR are
// compared with a reference computed here from the convolution formula. The
// jobs together use 3x3 and 5x5 filters, zero padding, bias and partial-sum
// accumulation, ReLU, max / average / downsampling pooling with one and two
// stages, and a feature placement with bank conflicts (CE stalls). Each
// mechanism is counted and every count must be non-zero at the end; the CE
// cycle count of every job is checked against its expected bound.
module tb_csp_top;
  import neuraghe_pkg::*;

  logic clk_ls = 1'b0, clk_hs = 1'b0, rst_n = 1'b0;
  always #10 clk_ls = ~clk_ls;
  always #5  clk_hs = ~clk_hs;

  // ---- DUT signals ----
  logic        uc_i_req = 1'b0;
  logic [31:0] uc_i_addr = '0, uc_i_rdata;
  logic        uc_d_req = 1'b0, uc_d_we = 1'b0;
  logic [3:0]  uc_d_be = 4'hf;
  logic [31:0] uc_d_addr = '0, uc_d_wdata = '0;
  logic        uc_d_gnt, uc_d_rvalid;
  logic [31:0] uc_d_rdata;
  logic        gpp_req = 1'b0, gpp_we = 1'b0;
  logic [3:0]  gpp_be = 4'hf;
  logic [31:0] gpp_addr = '0, gpp_wdata = '0;
  logic        gpp_gnt, gpp_rvalid;
  logic [31:0] gpp_rdata;
  logic        adma_ar_valid, adma_ar_ready = 1'b0;
  logic [31:0] adma_ar_addr;
  logic [7:0]  adma_ar_len;
  logic        adma_r_valid = 1'b0, adma_r_ready, adma_r_last = 1'b0;
  logic [63:0] adma_r_data = '0;
  logic        adma_aw_valid, adma_aw_ready = 1'b0;
  logic [31:0] adma_aw_addr;
  logic [7:0]  adma_aw_len;
  logic        adma_w_valid, adma_w_ready = 1'b0, adma_w_last;
  logic [63:0] adma_w_data;
  logic        adma_b_valid = 1'b0, adma_b_ready;
  logic        wdma_ar_valid, wdma_ar_ready = 1'b0;
  logic [31:0] wdma_ar_addr;
  logic [7:0]  wdma_ar_len;
  logic        wdma_r_valid = 1'b0, wdma_r_ready, wdma_r_last = 1'b0;
  logic [63:0] wdma_r_data = '0;
  logic        stdout_valid, irq_gpp, ce_busy, ce_stall;
  logic [7:0]  stdout_data;

  csp_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk_ls);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters ----
  int n_stall = 0, n_ce_cyc = 0, n_fs3 = 0, n_fs5 = 0, n_zp = 0, n_yin = 0, n_bias = 0, n_relu = 0;
  int n_pmax = 0, n_pavg = 0, n_pdwn = 0, n_pool2 = 0, n_adma_ld = 0, n_adma_st = 0, n_wdma = 0;
  int n_stdout = 0, n_irq = 0, n_fetch = 0;
  string out_text = "";
  always @(posedge clk_hs) if (rst_n) begin
    if (ce_stall) n_stall++;
    if (ce_busy)  n_ce_cyc++;
  end
  always @(posedge clk_ls) if (rst_n) begin
    if (stdout_valid) begin n_stdout++; out_text = $sformatf("%s%c", out_text, stdout_data); end
    if (irq_gpp) n_irq++;
  end

  // ---- behavioural DDR: 64 KiB of 64-bit words ----
  logic [63:0] ddr [8192];

  // activation DMA port (clk_ls): one read and one write burst at a time
  initial begin : adma_rd
    forever begin
      logic [31:0] a;
      int n;
      @(posedge clk_ls); #1;
      adma_ar_ready = ($urandom_range(3) != 0);
      if (adma_ar_valid && adma_ar_ready) begin
        a = adma_ar_addr; n = int'(adma_ar_len) + 1;
        @(posedge clk_ls); #1;
        adma_ar_ready = 1'b0;
        for (int k = 0; k < n; k++) begin
          while ($urandom_range(3) == 0) begin @(posedge clk_ls); #1; end
          adma_r_valid = 1'b1; adma_r_data = ddr[(a >> 3) + 32'(k)]; adma_r_last = (k == n - 1);
          do @(posedge clk_ls); while (!adma_r_ready);
          #1 adma_r_valid = 1'b0; adma_r_last = 1'b0;
        end
      end
    end
  end
  initial begin : adma_wr
    forever begin
      logic [31:0] a;
      int n;
      @(posedge clk_ls); #1;
      adma_aw_ready = ($urandom_range(3) != 0);
      if (adma_aw_valid && adma_aw_ready) begin
        a = adma_aw_addr; n = int'(adma_aw_len) + 1;
        @(posedge clk_ls); #1;
        adma_aw_ready = 1'b0;
        for (int k = 0; k < n; k++) begin
          while ($urandom_range(3) == 0) begin @(posedge clk_ls); #1; end
          adma_w_ready = 1'b1;
          do @(posedge clk_ls); while (!adma_w_valid);
          ddr[(a >> 3) + 32'(k)] = adma_w_data;
          check(adma_w_last == (k == n - 1), "ADMA w_last position");
          #1 adma_w_ready = 1'b0;
        end
        adma_b_valid = 1'b1;
        do @(posedge clk_ls); while (!adma_b_ready);
        #1 adma_b_valid = 1'b0;
      end
    end
  end
  // weight DMA port (clk_hs)
  initial begin : wdma_rd
    forever begin
      logic [31:0] a;
      int n;
      @(posedge clk_hs); #1;
      wdma_ar_ready = ($urandom_range(3) != 0);
      if (wdma_ar_valid && wdma_ar_ready) begin
        a = wdma_ar_addr; n = int'(wdma_ar_len) + 1;
        @(posedge clk_hs); #1;
        wdma_ar_ready = 1'b0;
        for (int k = 0; k < n; k++) begin
          while ($urandom_range(3) == 0) begin @(posedge clk_hs); #1; end
          wdma_r_valid = 1'b1; wdma_r_data = ddr[(a >> 3) + 32'(k)]; wdma_r_last = (k == n - 1);
          do @(posedge clk_hs); while (!wdma_r_ready);
          #1 wdma_r_valid = 1'b0; wdma_r_last = 1'b0;
        end
      end
    end
  end

  // ---- host bus accesses (general-purpose port) ----
  localparam logic [31:0] TCDM = 32'h1000_0000, IMEM = 32'h1010_0000, REGS = 32'h1020_0000;
  task automatic host_wr(input logic [31:0] a, input logic [31:0] d);
    @(posedge clk_ls); #1;
    gpp_req = 1'b1; gpp_we = 1'b1; gpp_addr = a; gpp_wdata = d;
    do @(posedge clk_ls); while (!gpp_gnt);
    #1 gpp_req = 1'b0; gpp_we = 1'b0;
  endtask
  task automatic host_rd(input logic [31:0] a, output logic [31:0] d);
    @(posedge clk_ls); #1;
    gpp_req = 1'b1; gpp_we = 1'b0; gpp_addr = a;
    do @(posedge clk_ls); while (!gpp_gnt);
    #1 gpp_req = 1'b0;
    while (!gpp_rvalid) begin @(posedge clk_ls); #1; end
    d = gpp_rdata;
  endtask
  task automatic uc_wr(input logic [31:0] a, input logic [31:0] d);
    @(posedge clk_ls); #1;
    uc_d_req = 1'b1; uc_d_we = 1'b1; uc_d_addr = a; uc_d_wdata = d;
    do @(posedge clk_ls); while (!uc_d_gnt);
    #1 uc_d_req = 1'b0; uc_d_we = 1'b0;
  endtask
  // wait for a sticky done flag, clear it; returns the low-speed cycles taken
  task automatic wait_done(input int bitn, output int cyc);
    logic [31:0] s;
    cyc = 0;
    do begin host_rd(REGS + 32'h14, s); cyc++; end while (!s[bitn] && cyc < 20000);
    check(s[bitn] == 1'b1, "done flag seen");
    host_wr(REGS + 32'h14, 32'(1) << bitn);
    host_rd(REGS + 32'h14, s);
    check(s[bitn] == 1'b0, "done flag cleared");
  endtask
  task automatic adma_xfer(input logic dir, input int ext, input int tw, input int beats);
    int c;
    host_wr(REGS + 32'h20, 32'(ext));
    host_wr(REGS + 32'h24, 32'(tw));
    host_wr(REGS + 32'h28, 32'(beats));
    host_wr(REGS + 32'h2C, {30'd0, dir, 1'b1});
    wait_done(1, c);
    if (dir) n_adma_st++; else n_adma_ld++;
  endtask

  // ---- reference data ----
  int x   [12][16][32];
  int yin [4][16][32];
  int wgt [16][27];
  int bia [4];
  int img [16][32];

  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction
  function automatic logic [15:0] px(input int v);
    return 16'(v);
  endfunction

  // DDR byte addresses of the operands
  localparam int WGT_DDR = 32'h0000, X_DDR = 32'h1000, YIN_DDR = 32'h5000, OUT_DDR = 32'h7000;

  task automatic run_job(input logic fs5, input logic zp, input int W, input int H,
                         input logic use_yin, input logic relu_en, input logic [1:0] pool_en,
                         input pool_method_e meth, input int shift, input int wm_row,
                         input int xstride);
    int p, p0, wo, ho, nf, cyc, ce0, st0, ow, oh;
    logic [31:0] d;
    p = fs5 ? 2 : 1; p0 = zp ? 0 : p; wo = W - 2*p0; ho = H - 2*p0;
    nf = fs5 ? 4 : 12;
    // random operands, written to DDR (4 pixels per 64-bit word)
    for (int f = 0; f < 12; f++) for (int r = 0; r < H; r++) for (int c = 0; c < W; c++)
      x[f][r][c] = int'($urandom_range(1023)) - 512;
    for (int o = 0; o < 4; o++) for (int r = 0; r < ho; r++) for (int c = 0; c < wo; c++)
      yin[o][r][c] = int'($urandom_range(4095)) - 2048;
    for (int s = 0; s < 16; s++) for (int t = 0; t < 27; t++)
      wgt[s][t] = (fs5 && t >= 25) ? 0 : int'($urandom_range(511)) - 256;
    for (int o = 0; o < 4; o++) bia[o] = int'($urandom_range(2047)) - 1024;
    for (int f = 0; f < nf; f++) for (int k = 0; k < H*W/4; k++)
      for (int j = 0; j < 4; j++) ddr[(X_DDR >> 3) + f*128 + k][16*j +: 16] = px(x[f][(4*k+j)/W][(4*k+j)%W]);
    for (int o = 0; o < 4; o++) for (int k = 0; k < ho*wo/4; k++)
      for (int j = 0; j < 4; j++) ddr[(YIN_DDR >> 3) + o*64 + k][16*j +: 16] = px(yin[o][(4*k+j)/wo][(4*k+j)%wo]);
    // coefficient i (SoP i/27, tap i%27; biases at 432..435): 4 per 64-bit word
    for (int q = 0; q < 109; q++) for (int j = 0; j < 4; j++) begin
      int i;
      i = 4*q + j;
      ddr[(WGT_DDR >> 3) + q][16*j +: 16] = (i < 432) ? px(wgt[i/27][i%27]) : px(bia[i-432]);
    end
    // weight DMA: 109 beats to weight-memory row wm_row (slot = row * 32 / 4)
    host_wr(REGS + 32'h30, 32'(WGT_DDR));
    host_wr(REGS + 32'h34, 32'(wm_row * 8));
    host_wr(REGS + 32'h38, 32'd109);
    host_wr(REGS + 32'h3C, 32'd1);
    wait_done(2, cyc);
    n_wdma++;
    // activation DMA loads
    for (int f = 0; f < nf; f++) adma_xfer(1'b0, X_DDR + f*1024, 100 + f*xstride, H*W/4);
    if (use_yin) for (int o = 0; o < 4; o++) adma_xfer(1'b0, YIN_DDR + o*512, 6000 + o*300, ho*wo/4);
    // CE configuration and start
    host_wr(REGS + 32'h04, {19'd0, 5'(shift), meth, pool_en, relu_en, use_yin, zp, fs5});
    host_wr(REGS + 32'h08, {16'(H), 16'(W)});
    host_wr(REGS + 32'h0C, {12'd0, 4'hf, 4'd0, fs5 ? 12'h00f : 12'hfff});
    host_wr(REGS + 32'h10, 32'(wm_row));
    for (int f = 0; f < 12; f++) host_wr(REGS + 32'h40 + 32'(4*f), 32'(100 + f*xstride));
    for (int o = 0; o < 4; o++) begin
      host_wr(REGS + 32'h70 + 32'(4*o), 32'(6000 + o*300));
      host_wr(REGS + 32'h80 + 32'(4*o), 32'(8000 + o*300 + o));
    end
    ce0 = n_ce_cyc; st0 = n_stall;
    host_wr(REGS + 32'h00, 32'd1);
    host_rd(REGS + 32'h00, d);
    check(d[0] == 1'b1, "CE busy after start");
    wait_done(0, cyc);
    // CE time (high-speed cycles): 15 weight load + 2 prefetch + one advance
    // per pushed word + 12 drain, plus a bounded cost per stall cycle
    begin
      int push, lim;
      push = (H + p + 1) * W / 2;
      lim = 15 + 2 + push + 12 + 3 * (n_stall - st0);
      check(n_ce_cyc - ce0 <= lim && n_ce_cyc - ce0 >= push, "CE cycle count");
      $display("job fs5=%0d zp=%0d %0dx%0d: CE %0d cycles (bound %0d), %0d stall cycles",
               fs5, zp, H, W, n_ce_cyc - ce0, lim, n_stall - st0);
    end
    // outputs back to DDR and compared with the reference
    ow = wo; oh = ho;
    for (int st = 0; st < 2; st++) if (pool_en[st]) begin ow /= 2; oh /= 2; end
    for (int o = 0; o < 4; o++) adma_xfer(1'b1, OUT_DDR + o*512, 8000 + o*300 + o, ow*oh/4);
    for (int o = 0; o < 4; o++) begin
      int w2, h2;
      for (int r = 0; r < ho; r++) for (int c = 0; c < wo; c++) begin
        longint acc;
        acc = 0;
        for (int l = 0; l < 4; l++)
          for (int s = 0; s < (fs5 ? 1 : 3); s++)
            for (int dr = 0; dr < 2*p+1; dr++) for (int dc = 0; dc < 2*p+1; dc++) begin
              int ir, ic, t;
              ir = r + p0 + dr - p; ic = c + p0 + dc - p;
              t = fs5 ? (5*dr + dc) : (9*s + 3*dr + dc);
              if (ir >= 0 && ir < H && ic >= 0 && ic < W)
                acc += longint'(x[l + 4*s][ir][ic]) * longint'(wgt[o*4 + l][t]);
            end
        img[r][c] = sat((acc >>> shift) + (use_yin ? yin[o][r][c] : bia[o]));
        if (relu_en && img[r][c] < 0) img[r][c] = 0;
      end
      w2 = wo; h2 = ho;
      for (int st = 0; st < 2; st++) if (pool_en[st]) begin
        for (int r = 0; r < h2/2; r++) for (int c = 0; c < w2/2; c++) begin
          int a, b, e, f, v;
          a = img[2*r][2*c]; b = img[2*r][2*c+1]; e = img[2*r+1][2*c]; f = img[2*r+1][2*c+1];
          case (meth)
            POOL_MAX: begin v = a; if (b > v) v = b; if (e > v) v = e; if (f > v) v = f; end
            POOL_AVG: v = (a + b + e + f) >>> 2;
            default:  v = a;
          endcase
          img[r][c] = v;
        end
        w2 /= 2; h2 /= 2;
      end
      for (int k = 0; k < ow*oh; k++)
        check(ddr[(OUT_DDR >> 3) + o*64 + k/4][16*(k%4) +: 16] == px(img[k/ow][k%ow]),
              $sformatf("output %0d pixel %0d", o, k));
    end
    if (fs5) n_fs5++; else n_fs3++;
    if (zp) n_zp++;
    if (use_yin) n_yin++; else n_bias++;
    if (relu_en) n_relu++;
    if (pool_en != 2'b00)
      case (meth) POOL_MAX: n_pmax++; POOL_AVG: n_pavg++; default: n_pdwn++; endcase
    if (pool_en == 2'b11) n_pool2++;
  endtask

  initial begin
    logic [31:0] d;
    repeat (4) @(posedge clk_ls);
    #1 rst_n = 1'b1;
    // instruction memory: host writes a program image, micro-controller fetches it
    for (int k = 0; k < 8; k++) host_wr(IMEM + 32'(4*k), 32'hC0DE_0000 + 32'(k * 17));
    for (int k = 0; k < 8; k++) begin
      @(posedge clk_ls); #1 uc_i_req = 1'b1; uc_i_addr = 32'(4*k);
      @(posedge clk_ls); #1 uc_i_req = 1'b0;
      check(uc_i_rdata == 32'hC0DE_0000 + 32'(k * 17), "instruction fetch");
      n_fetch++;
    end
    host_rd(IMEM + 32'd8, d);
    check(d == 32'hC0DE_0022, "host reads instruction memory");
    // TCDM through the host port
    host_wr(TCDM + 32'(4*12345), 32'hDEAD_BEEF);
    host_rd(TCDM + 32'(4*12345), d);
    check(d == 32'hDEAD_BEEF, "host TCDM word access");
    // three end-to-end jobs
    run_job(1'b0, 1'b1, 16,  8, 1'b0, 1'b1, 2'b01, POOL_MAX, 8,  3, 197);
    run_job(1'b1, 1'b0, 20, 12, 1'b1, 1'b0, 2'b11, POOL_AVG, 7, 20, 197);
    // stride 192 words: all features of one word index in one bank
    run_job(1'b0, 1'b0, 32, 10, 1'b0, 1'b0, 2'b01, POOL_DWN, 6, 40, 192);
    // micro-controller: standard output and host notification
    begin
      string msg;
      msg = "done";
      for (int i = 0; i < msg.len(); i++) uc_wr(REGS + 32'h18, 32'(msg[i]));
    end
    uc_wr(REGS + 32'h1C, 32'd1);
    repeat (3) @(posedge clk_ls);
    check(out_text == "done", "standard output text");
    // every mechanism was exercised
    check(n_stall > 0,  "CE stalls seen");
    check(n_fs3 > 0 && n_fs5 > 0, "3x3 and 5x5 jobs");
    check(n_zp > 0 && n_yin > 0 && n_bias > 0 && n_relu > 0, "padding, y_in, bias, ReLU");
    check(n_pmax > 0 && n_pavg > 0 && n_pdwn > 0 && n_pool2 > 0, "pooling methods and two stages");
    check(n_adma_ld > 0 && n_adma_st > 0 && n_wdma > 0, "DMA transfers");
    check(n_stdout == 4 && n_irq == 1 && n_fetch == 8, "stdout, irq, fetches");
    $display("mechanisms: stall_cycles=%0d ce_cycles=%0d fs3=%0d fs5=%0d zp=%0d yin=%0d bias=%0d relu=%0d",
             n_stall, n_ce_cyc, n_fs3, n_fs5, n_zp, n_yin, n_bias, n_relu);
    $display("mechanisms: pool_max=%0d pool_avg=%0d pool_dwn=%0d pool_2stage=%0d adma_load=%0d adma_store=%0d wdma=%0d stdout=%0d irq=%0d fetch=%0d",
             n_pmax, n_pavg, n_pdwn, n_pool2, n_adma_ld, n_adma_st, n_wdma, n_stdout, n_irq, n_fetch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
