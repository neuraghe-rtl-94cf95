// conv_engine: the Convolution Engine (CE) of the CSP.
//
// One job convolves up to 12 input features (3x3 filters, three per line
// buffer) or 4 input features (5x5 filters, one per line buffer) into 4
// output features, all H x W pixels in the TCDM, row-major, two pixels per
// word. Structure, as in the published CE organisation:
//   * weight loader + register file: 16 x 27 weights and 4 biases;
//   * 4 line buffers (LB l is fed by x_in ports l, l+4, l+8);
//   * a 4x4 matrix of SoP units: SoP(o, l) applies the filters of output o
//     to the windows of LB l;
//   * per output o: Add-Shift (row sum, shift, + y_in or bias), ReLU and two
//     cascaded 2x2 pooling stages, then the y_out port.
// The controller, this design's own since the published text does not
// describe it, runs a job as: load the coefficients (15 cycles), then run
// the datapath. Every active read port (x_in, and y_in when partial sums are
// accumulated) fetches its words in order, on its own, into a 3-entry
// prefetch FIFO; a read granted in one cycle returns its word in the next.
// The datapath "advances" (line buffers shift, SoP / Add-Shift / pooling
// pipelines move) in a cycle when every active x_in FIFO holds a word (or the
// zero-padding tail is being pushed: after H*W/2 words, zero words go in
// until H+p+1 rows entered, p = 1 or 2 the filter half-size), every y_in FIFO
// holds a word if the Add-Shift consumes one, and the pending output words
// of the y_out ports are written (now or earlier). Crossbar conflicts thus
// only delay single ports; the datapath holds when an operand is missing.
// stall is high in a cycle in which a CE request is not granted. The job
// ends when all output words are written; done pulses for one cycle.
//
// Output size: (H - 2p) x (W - 2p) without padding, H x W with zp_en,
// divided by 2 in both directions per enabled pooling stage. Word addresses
// advance by one per word from x_base / yin_base / yout_base.
//
// Timing: one advance per cycle without conflicts, i.e. two output pixels per
// output channel per cycle (before pooling), after the line-buffer fill and a
// pipeline of 8 steps (1 window, 6 SoP, 1 Add-Shift). Stride is 1.
module conv_engine
  import neuraghe_pkg::*;
#(
  parameter int unsigned LINE_WORDS = 128
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  ce_cfg_t                              cfg,
  input  logic                                 start,
  output logic                                 busy,
  output logic                                 done,
  output logic                                 stall,
  // TCDM ports through the crossbar: 0..11 x_in, 12..15 y_in, 16..19 y_out
  output logic [N_CE_PORT-1:0]                 p_req,
  output logic [N_CE_PORT-1:0]                 p_we,
  output logic [N_CE_PORT-1:0][TCDM_AW-1:0]    p_addr,
  output logic [N_CE_PORT-1:0][WORD_W-1:0]     p_wdata,
  input  logic [N_CE_PORT-1:0]                 p_gnt,
  input  logic [N_CE_PORT-1:0][WORD_W-1:0]     p_rdata,
  // weight memory read ports
  output logic [N_BANKS-1:0]                   wm_req,
  output logic [N_BANKS-1:0][WM_AW-1:0]        wm_addr,
  input  logic [N_BANKS-1:0][PIX_W-1:0]        wm_rdata
);
  localparam int unsigned YIN0  = N_XIN;
  localparam int unsigned YOUT0 = N_XIN + N_OUT;
  localparam int unsigned SOP_LAT = 6;

  localparam int unsigned FD = 3;   // prefetch FIFO depth per read port

  typedef enum logic [1:0] {IDLE, LOADW, RUN} state_e;
  state_e   state;
  ce_cfg_t  c;                    // configuration latched at start

  logic [19:0] pidx, words_in, push_total, yin_words;
  logic [19:0] yout_cnt, out_words;
  logic [15:0] wout, pool1_w;
  logic        adv, win_new;
  logic [SOP_LAT-1:0] tag;
  logic        x_ok, yin_ok, out_ok, push_now, yin_pop;
  logic [N_OUT-1:0] written;

  win_t [N_LB-1:0] lb_a, lb_b;
  logic [N_LB-1:0] lb_valid;

  logic [N_OUT-1:0]              pool1_v;
  logic [N_OUT-1:0][WORD_W-1:0]  pool1_out;
  logic                          pool1_valid;

  // per read port (x_in 0..11, y_in 12..15): fetch counter and prefetch FIFO
  localparam int unsigned NRD = N_XIN + N_OUT;
  logic [NRD-1:0][19:0]            fidx;
  logic [NRD-1:0][WORD_W-1:0]      fifo [FD];
  logic [NRD-1:0][1:0]             cnt;
  logic [NRD-1:0][1:0]             rd_ptr, wr_ptr;
  logic [NRD-1:0]                  inflight, rd_active, pop, nonempty;
  logic [NRD-1:0][WORD_W-1:0]      head;

  // ---------------- weight loader ----------------
  win_t [N_SOP-1:0] weights;
  pix_t [N_OUT-1:0] biases;
  logic             wl_done;

  weight_loader u_wl (
    .clk, .rst_n, .start(state == IDLE && start), .base(cfg.wm_base),
    .wm_req, .wm_addr, .wm_rdata, .weights, .biases, .busy(), .done(wl_done));

  // ---------------- job sizes ----------------
  logic [15:0] p_sz, p0_sz, hout_n, wout_n;
  logic [1:0]  npool;
  always_comb begin
    p_sz   = cfg.fs5 ? 16'd2 : 16'd1;
    p0_sz  = cfg.zp_en ? 16'd0 : p_sz;
    wout_n = cfg.width  - 16'd2 * p0_sz;
    hout_n = cfg.height - 16'd2 * p0_sz;
    npool  = 2'(cfg.pool_en[0]) + 2'(cfg.pool_en[1]);
  end

  // ---------------- requests ----------------
  logic [N_CE_PORT-1:0] req;
  always_comb begin
    for (int p = 0; p < NRD; p++) begin
      if (p < N_XIN) rd_active[p] = c.x_en[p] && (!c.fs5 || p < N_LB);
      else           rd_active[p] = c.use_yin && c.y_en[p - N_XIN];
      nonempty[p] = (cnt[p] != 2'd0);
      head[p]     = fifo[rd_ptr[p]][p];
      // fetch while the FIFO plus the read in flight leave room
      req[p] = (state == RUN) && rd_active[p] &&
               (fidx[p] < ((p < N_XIN) ? words_in : yin_words)) &&
               (32'(cnt[p]) + 32'(inflight[p]) < FD);
    end
    for (int o = 0; o < N_OUT; o++)
      req[YOUT0 + o] = (state == RUN) && c.y_en[o] && pool1_valid && !written[o];
    p_req = req;
    p_we  = '0;
    for (int p = 0; p < NRD; p++) begin
      p_addr[p]  = ((p < N_XIN) ? c.x_base[p] : c.yin_base[p - N_XIN]) + TCDM_AW'(fidx[p]);
      p_wdata[p] = '0;
    end
    for (int o = 0; o < N_OUT; o++) begin
      p_we[YOUT0 + o]    = 1'b1;
      p_addr[YOUT0 + o]  = c.yout_base[o] + TCDM_AW'(yout_cnt);
      p_wdata[YOUT0 + o] = pool1_out[o];
    end
  end

  // ---------------- advance condition ----------------
  always_comb begin
    push_now = (pidx < push_total);
    x_ok     = 1'b1;
    if (pidx < words_in)
      for (int p = 0; p < N_XIN; p++) if (rd_active[p] && !nonempty[p]) x_ok = 1'b0;
    yin_pop = c.use_yin && tag[SOP_LAT-1];
    yin_ok  = 1'b1;
    if (yin_pop)
      for (int o = 0; o < N_OUT; o++) if (rd_active[N_XIN + o] && !nonempty[N_XIN + o]) yin_ok = 1'b0;
    out_ok = 1'b1;
    for (int o = 0; o < N_OUT; o++)
      if (c.y_en[o] && pool1_valid && !written[o] && !p_gnt[YOUT0 + o]) out_ok = 1'b0;
    adv   = (state == RUN) && x_ok && yin_ok && out_ok;
    for (int p = 0; p < NRD; p++)
      pop[p] = adv && rd_active[p] && ((p < N_XIN) ? (pidx < words_in) : yin_pop);
    stall = (state == RUN) && ((req & ~p_gnt) != '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; c <= '0; pidx <= '0; words_in <= '0; push_total <= '0; yin_words <= '0;
      yout_cnt <= '0; out_words <= '0; wout <= '0; pool1_w <= '0; win_new <= 1'b0;
      tag <= '0; done <= 1'b0; written <= '0;
      fidx <= '0; cnt <= '0; rd_ptr <= '0; wr_ptr <= '0; inflight <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          c          <= cfg;
          state      <= LOADW;
          pidx       <= '0;
          yout_cnt   <= '0;
          words_in   <= 20'(cfg.height) * 20'(cfg.width >> 1);
          push_total <= (20'(cfg.height) + 20'(p_sz) + 20'd1) * 20'(cfg.width >> 1);
          yin_words  <= 20'(hout_n) * 20'(wout_n) >> 1;
          out_words  <= 20'(hout_n >> npool) * 20'(wout_n >> npool) >> 1;
          wout       <= wout_n;
          pool1_w    <= cfg.pool_en[0] ? (wout_n >> 1) : wout_n;
          win_new    <= 1'b0;
          tag        <= '0;
          written    <= '0;
          fidx <= '0; cnt <= '0; rd_ptr <= '0; wr_ptr <= '0; inflight <= '0;
        end
        LOADW: if (wl_done) state <= RUN;
        RUN: begin
          for (int p = 0; p < NRD; p++) begin
            // read data arrive one cycle after the grant
            inflight[p] <= req[p] && p_gnt[p];
            if (req[p] && p_gnt[p]) fidx[p] <= fidx[p] + 20'd1;
            if (inflight[p]) wr_ptr[p] <= (wr_ptr[p] == 2'(FD-1)) ? 2'd0 : wr_ptr[p] + 2'd1;
            if (pop[p])      rd_ptr[p] <= (rd_ptr[p] == 2'(FD-1)) ? 2'd0 : rd_ptr[p] + 2'd1;
            cnt[p] <= cnt[p] + 2'(inflight[p]) - 2'(pop[p]);
          end
          for (int o = 0; o < N_OUT; o++)
            if (p_gnt[YOUT0 + o] && req[YOUT0 + o]) written[o] <= 1'b1;
          if (adv) begin
            if (push_now) pidx <= pidx + 20'd1;
            win_new <= push_now;
            tag     <= {tag[SOP_LAT-2:0], lb_valid[0] && win_new};
            if (pool1_valid) begin
              yout_cnt <= yout_cnt + 20'd1;
              written  <= '0;
            end
          end
          if (yout_cnt == out_words) begin
            state <= IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  always_ff @(posedge clk)
    for (int p = 0; p < NRD; p++)
      if (state == RUN && inflight[p]) fifo[wr_ptr[p]][p] <= p_rdata[p];

  assign busy = (state != IDLE);

  // ---------------- line buffers ----------------
  for (genvar l = 0; l < N_LB; l++) begin : g_lb
    logic [2:0][WORD_W-1:0] din;
    always_comb
      for (int s = 0; s < 3; s++) begin
        int p;
        p = l + N_LB * s;
        din[s] = (rd_active[p] && pidx < words_in) ? head[p] : '0;
      end
    logic [15:0] unused_row, unused_col;
    line_buffer #(.LINE_WORDS(LINE_WORDS)) u_lb (
      .clk, .rst_n, .start(state == IDLE && start), .en(adv && push_now),
      .fs5(c.fs5), .zp_en(c.zp_en), .width(c.width), .height(c.height), .din,
      .win_a(lb_a[l]), .win_b(lb_b[l]), .win_valid(lb_valid[l]),
      .win_row(unused_row), .win_col(unused_col));
  end

  // ---------------- SoP matrix, Add-Shift, ReLU, pooling ----------------
  assign pool1_valid = pool1_v[0];

  for (genvar o = 0; o < N_OUT; o++) begin : g_row
    acc_t [N_LB-1:0] sa, sb;
    for (genvar l = 0; l < N_LB; l++) begin : g_col
      sop u_sop (.clk, .en(adv), .win_a(lb_a[l]), .win_b(lb_b[l]),
                 .w(weights[o*N_LB + l]), .y_a(sa[l]), .y_b(sb[l]));
    end
    logic [WORD_W-1:0] yin_word, as_y, relu_y, p0_y;
    logic              as_v, p0_v;
    assign yin_word = rd_active[YIN0 + o] ? head[YIN0 + o] : '0;
    add_shift u_as (.clk, .rst_n, .en(adv), .valid_i(tag[SOP_LAT-1]), .sop_a(sa), .sop_b(sb),
                    .shift(c.shift), .use_yin(c.use_yin), .y_in(yin_word), .bias(biases[o]),
                    .valid_o(as_v), .y(as_y));
    relu u_relu (.act_en(c.relu_en), .din(as_y), .dout(relu_y));
    pooling u_pool0 (.clk, .rst_n, .start(state == IDLE && start), .en(adv),
                     .enable(c.pool_en[0]), .method(c.pool_method), .width(wout),
                     .in_valid(as_v), .din(relu_y), .out_valid(p0_v), .dout(p0_y));
    pooling u_pool1 (.clk, .rst_n, .start(state == IDLE && start), .en(adv),
                     .enable(c.pool_en[1]), .method(c.pool_method), .width(pool1_w),
                     .in_valid(p0_v), .din(p0_y), .out_valid(pool1_v[o]), .dout(pool1_out[o]));
  end

  // a write is only issued while running, and never past the job's end
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                                 (state == RUN && pool1_valid) |-> (yout_cnt < out_words));
  // a prefetch FIFO never overflows
  for (genvar p = 0; p < NRD; p++) begin : g_fifo_chk
    a_fifo: assert property (@(posedge clk) disable iff (!rst_n) 32'(cnt[p]) + 32'(inflight[p]) <= FD);
  end

endmodule
