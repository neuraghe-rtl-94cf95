// csp_top: the Convolution-Specific Processor (CSP).
//
// The CSP sits in the programmable logic next to the host processors. It is
// built around a 32-bank tightly-coupled data memory (TCDM) shared by:
//   * the Convolution Engine (CE), through a crossbar on the TCDM's port A,
//     in the high-speed clock domain (clk_hs, 140 MHz in the published
//     system) together with the weight memory and the weight DMA;
//   * the micro-controller, the host and the activation DMA, through the
//     logarithmic interconnect on port B, in the low-speed domain (clk_ls,
//     70 MHz).
// The micro-controller core itself is outside this module: its instruction
// fetch port (to the instruction memory) and its data port (to the control
// bus) are ports here. So are the host's general-purpose master port, two
// 64-bit AXI master ports towards DDR (one for the activation DMA, one for
// the weight DMA), a standard-output character stream and a notification
// line to the host. See ctrl_bus for the address and register map.
//
// Start and done events of the CE and the weight DMA cross the clock domains
// through toggle synchronisers; the CE and DMA configuration registers live
// in the low-speed domain and must not change while a job runs. rst_n is
// asserted asynchronously and must be released synchronously to both
// clocks. The published system uses two HP ports; their mapping to the two
// DMAs, and the plain request/grant buses, are this design's choices.
module csp_top
  import neuraghe_pkg::*;
#(
  parameter int unsigned LINE_WORDS = 128,
  parameter int unsigned TCDM_WORDS = 1024,   // words per TCDM bank
  parameter int unsigned WM_DEPTH   = 512,    // weights per weight-memory bank
  parameter int unsigned IMEM_WORDS = 8192
) (
  input  logic        clk_ls,
  input  logic        clk_hs,
  input  logic        rst_n,
  // micro-controller instruction fetch (word address, data one cycle later)
  input  logic        uc_i_req,
  input  logic [31:0] uc_i_addr,
  output logic [31:0] uc_i_rdata,
  // micro-controller data port
  input  logic        uc_d_req,
  input  logic        uc_d_we,
  input  logic [3:0]  uc_d_be,
  input  logic [31:0] uc_d_addr,
  input  logic [31:0] uc_d_wdata,
  output logic        uc_d_gnt,
  output logic        uc_d_rvalid,
  output logic [31:0] uc_d_rdata,
  // host general-purpose master port
  input  logic        gpp_req,
  input  logic        gpp_we,
  input  logic [3:0]  gpp_be,
  input  logic [31:0] gpp_addr,
  input  logic [31:0] gpp_wdata,
  output logic        gpp_gnt,
  output logic        gpp_rvalid,
  output logic [31:0] gpp_rdata,
  // activation DMA: AXI master to DDR (clk_ls)
  output logic        adma_ar_valid,
  input  logic        adma_ar_ready,
  output logic [31:0] adma_ar_addr,
  output logic [7:0]  adma_ar_len,
  input  logic        adma_r_valid,
  output logic        adma_r_ready,
  input  logic [63:0] adma_r_data,
  input  logic        adma_r_last,
  output logic        adma_aw_valid,
  input  logic        adma_aw_ready,
  output logic [31:0] adma_aw_addr,
  output logic [7:0]  adma_aw_len,
  output logic        adma_w_valid,
  input  logic        adma_w_ready,
  output logic [63:0] adma_w_data,
  output logic        adma_w_last,
  input  logic        adma_b_valid,
  output logic        adma_b_ready,
  // weight DMA: AXI read master to DDR (clk_hs)
  output logic        wdma_ar_valid,
  input  logic        wdma_ar_ready,
  output logic [31:0] wdma_ar_addr,
  output logic [7:0]  wdma_ar_len,
  input  logic        wdma_r_valid,
  output logic        wdma_r_ready,
  input  logic [63:0] wdma_r_data,
  input  logic        wdma_r_last,
  // towards the host
  output logic        stdout_valid,
  output logic [7:0]  stdout_data,
  output logic        irq_gpp,
  // CE status (clk_hs), for observation
  output logic        ce_busy,
  output logic        ce_stall
);
  localparam int unsigned TRW = $clog2(TCDM_WORDS);
  localparam int unsigned WSW = $clog2(WM_DEPTH * N_BANKS / 4);

  // ---------------- control bus (clk_ls) ----------------
  logic [1:0]               l_req, l_we, l_gnt, l_rvalid;
  logic [1:0][3:0]          l_be;
  logic [1:0][TCDM_AW-1:0]  l_addr;
  logic [1:0][WORD_W-1:0]   l_wdata, l_rdata;
  logic                     im_req, im_we;
  logic [3:0]               im_be;
  logic [$clog2(IMEM_WORDS)-1:0] im_addr;
  logic [31:0]              im_wdata, im_rdata;
  ce_cfg_t                  ce_cfg;
  logic ce_start_ls, ce_done_ls, ce_start_hs, ce_done_hs;
  logic adma_start, adma_dir, adma_done;
  logic [31:0] adma_ext, wdma_ext;
  logic [TCDM_AW-1:0] adma_tcdm;
  logic [8:0] adma_len, wdma_len;
  logic [11:0] wdma_wm;
  logic wdma_start_ls, wdma_start_hs, wdma_done_ls, wdma_done_hs;
  logic [1:0] m_gnt, m_rvalid;
  logic [1:0][31:0] m_rdata;

  ctrl_bus #(.IMEM_WORDS(IMEM_WORDS)) u_bus (
    .clk(clk_ls), .rst_n,
    .m_req({gpp_req, uc_d_req}), .m_we({gpp_we, uc_d_we}), .m_be({gpp_be, uc_d_be}),
    .m_addr({gpp_addr, uc_d_addr}), .m_wdata({gpp_wdata, uc_d_wdata}),
    .m_gnt, .m_rvalid, .m_rdata,
    .l_req, .l_we, .l_be, .l_addr, .l_wdata, .l_gnt, .l_rvalid, .l_rdata,
    .im_req, .im_we, .im_be, .im_addr, .im_wdata, .im_rdata,
    .ce_cfg, .ce_start(ce_start_ls), .ce_done(ce_done_ls),
    .adma_start, .adma_dir, .adma_ext, .adma_tcdm, .adma_len, .adma_done,
    .wdma_start(wdma_start_ls), .wdma_ext, .wdma_wm, .wdma_len, .wdma_done(wdma_done_ls),
    .stdout_valid, .stdout_data, .irq_gpp);

  assign uc_d_gnt    = m_gnt[0];
  assign uc_d_rvalid = m_rvalid[0];
  assign uc_d_rdata  = m_rdata[0];
  assign gpp_gnt     = m_gnt[1];
  assign gpp_rvalid  = m_rvalid[1];
  assign gpp_rdata   = m_rdata[1];

  // ---------------- instruction memory (clk_ls) ----------------
  instr_mem #(.WORDS(IMEM_WORDS)) u_imem (
    .clk(clk_ls), .i_req(uc_i_req), .i_addr(uc_i_addr[$clog2(IMEM_WORDS)+1:2]), .i_rdata(uc_i_rdata),
    .d_req(im_req), .d_we(im_we), .d_be(im_be), .d_addr(im_addr), .d_wdata(im_wdata), .d_rdata(im_rdata));

  // ---------------- activation DMA (clk_ls) ----------------
  logic               ad_req, ad_we, ad_gnt, ad_rvalid;
  logic [3:0]         ad_be;
  logic [TCDM_AW-1:0] ad_addr;
  logic [WORD_W-1:0]  ad_wdata, ad_rdata;

  adma u_adma (
    .clk(clk_ls), .rst_n, .start(adma_start), .dir(adma_dir), .ext_addr(adma_ext),
    .tcdm_addr(adma_tcdm), .len_beats(adma_len), .busy(), .done(adma_done),
    .ar_valid(adma_ar_valid), .ar_ready(adma_ar_ready), .ar_addr(adma_ar_addr), .ar_len(adma_ar_len),
    .r_valid(adma_r_valid), .r_ready(adma_r_ready), .r_data(adma_r_data), .r_last(adma_r_last),
    .aw_valid(adma_aw_valid), .aw_ready(adma_aw_ready), .aw_addr(adma_aw_addr), .aw_len(adma_aw_len),
    .w_valid(adma_w_valid), .w_ready(adma_w_ready), .w_data(adma_w_data), .w_last(adma_w_last),
    .b_valid(adma_b_valid), .b_ready(adma_b_ready),
    .t_req(ad_req), .t_we(ad_we), .t_be(ad_be), .t_addr(ad_addr), .t_wdata(ad_wdata),
    .t_gnt(ad_gnt), .t_rvalid(ad_rvalid), .t_rdata(ad_rdata));

  // ---------------- logarithmic interconnect (clk_ls) ----------------
  logic [N_BANKS-1:0]            tb_req, tb_we;
  logic [N_BANKS-1:0][3:0]       tb_be;
  logic [N_BANKS-1:0][TRW-1:0]   tb_addr;
  logic [N_BANKS-1:0][WORD_W-1:0] tb_wdata, tb_rdata;
  logic [2:0]                    lic_gnt, lic_rvalid;
  logic [2:0][WORD_W-1:0]        lic_rdata;

  log_interconnect #(.N_MASTERS(3), .BANK_WORDS(TCDM_WORDS)) u_lic (
    .clk(clk_ls), .rst_n,
    .m_req({ad_req, l_req}), .m_we({ad_we, l_we}), .m_be({ad_be, l_be}),
    .m_addr({ad_addr, l_addr}), .m_wdata({ad_wdata, l_wdata}),
    .m_gnt(lic_gnt), .m_rvalid(lic_rvalid), .m_rdata(lic_rdata),
    .b_req(tb_req), .b_we(tb_we), .b_be(tb_be), .b_addr(tb_addr), .b_wdata(tb_wdata), .b_rdata(tb_rdata));

  assign l_gnt    = lic_gnt[1:0];
  assign l_rvalid = lic_rvalid[1:0];
  assign l_rdata  = lic_rdata[1:0];
  assign ad_gnt    = lic_gnt[2];
  assign ad_rvalid = lic_rvalid[2];
  assign ad_rdata  = lic_rdata[2];

  // ---------------- clock-domain crossings ----------------
  pulse_sync u_sync_ce_start (.clk_src(clk_ls), .rst_src_n(rst_n), .pulse_src(ce_start_ls),
                              .clk_dst(clk_hs), .rst_dst_n(rst_n), .pulse_dst(ce_start_hs));
  pulse_sync u_sync_ce_done  (.clk_src(clk_hs), .rst_src_n(rst_n), .pulse_src(ce_done_hs),
                              .clk_dst(clk_ls), .rst_dst_n(rst_n), .pulse_dst(ce_done_ls));
  pulse_sync u_sync_wd_start (.clk_src(clk_ls), .rst_src_n(rst_n), .pulse_src(wdma_start_ls),
                              .clk_dst(clk_hs), .rst_dst_n(rst_n), .pulse_dst(wdma_start_hs));
  pulse_sync u_sync_wd_done  (.clk_src(clk_hs), .rst_src_n(rst_n), .pulse_src(wdma_done_hs),
                              .clk_dst(clk_ls), .rst_dst_n(rst_n), .pulse_dst(wdma_done_ls));

  // ---------------- weight DMA and weight memory (clk_hs) ----------------
  logic            wm_wr_en;
  logic [WSW-1:0]  wm_wr_addr;
  logic [63:0]     wm_wr_data;
  logic [N_BANKS-1:0]                 wm_req;
  logic [N_BANKS-1:0][WM_AW-1:0]      wm_addr;
  logic [N_BANKS-1:0][PIX_W-1:0]      wm_rdata;

  wdma #(.WM_SLOT_W(WSW)) u_wdma (
    .clk(clk_hs), .rst_n, .start(wdma_start_hs), .ext_addr(wdma_ext), .wm_addr(WSW'(wdma_wm)),
    .len_beats(wdma_len), .busy(), .done(wdma_done_hs),
    .ar_valid(wdma_ar_valid), .ar_ready(wdma_ar_ready), .ar_addr(wdma_ar_addr), .ar_len(wdma_ar_len),
    .r_valid(wdma_r_valid), .r_ready(wdma_r_ready), .r_data(wdma_r_data), .r_last(wdma_r_last),
    .wm_wr_en, .wm_wr_addr, .wm_wr_data);

  weight_memory #(.DEPTH(WM_DEPTH)) u_wm (
    .clk(clk_hs), .wr_en(wm_wr_en), .wr_addr(wm_wr_addr), .wr_data(wm_wr_data),
    .rd_req(wm_req), .rd_addr(wm_addr), .rd_data(wm_rdata));

  // ---------------- convolution engine and crossbar (clk_hs) ----------------
  logic [N_CE_PORT-1:0]                p_req, p_we, p_gnt;
  logic [N_CE_PORT-1:0][TCDM_AW-1:0]   p_addr;
  logic [N_CE_PORT-1:0][WORD_W-1:0]    p_wdata, p_rdata;
  logic [N_BANKS-1:0]                  ta_req, ta_we;
  logic [N_BANKS-1:0][TRW-1:0]         ta_addr;
  logic [N_BANKS-1:0][WORD_W-1:0]      ta_wdata, ta_rdata;

  conv_engine #(.LINE_WORDS(LINE_WORDS)) u_ce (
    .clk(clk_hs), .rst_n, .cfg(ce_cfg), .start(ce_start_hs), .busy(ce_busy), .done(ce_done_hs),
    .stall(ce_stall), .p_req, .p_we, .p_addr, .p_wdata, .p_gnt, .p_rdata,
    .wm_req, .wm_addr, .wm_rdata);

  ce_xbar #(.N_PORTS(N_CE_PORT), .BANK_WORDS(TCDM_WORDS)) u_xbar (
    .clk(clk_hs), .rst_n, .p_req, .p_we, .p_addr, .p_wdata, .p_gnt, .p_rdata,
    .b_req(ta_req), .b_we(ta_we), .b_addr(ta_addr), .b_wdata(ta_wdata), .b_rdata(ta_rdata));

  // ---------------- TCDM ----------------
  tcdm #(.BANK_WORDS(TCDM_WORDS)) u_tcdm (
    .clk_a(clk_hs), .a_req(ta_req), .a_we(ta_we), .a_addr(ta_addr), .a_wdata(ta_wdata), .a_rdata(ta_rdata),
    .clk_b(clk_ls), .b_req(tb_req), .b_we(tb_we), .b_be(tb_be), .b_addr(tb_addr), .b_wdata(tb_wdata),
    .b_rdata(tb_rdata));

endmodule
