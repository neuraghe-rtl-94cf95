// ctrl_bus: peripheral interconnect and control registers of the CSP.
//
// Two 32-bit bus masters reach the CSP: master 0 is the micro-controller's
// data port, master 1 the host (general-purpose processor) port. Each request
// carries a byte address, byte enables and write data; it is granted in the
// cycle it is accepted and answered with rvalid (and rdata for reads) one
// cycle after the grant, for reads and writes alike. Address map:
//   0x1000_0000 + 4*w   TCDM word w   -> forwarded to the master's own port
//                                        of the logarithmic interconnect
//   0x1010_0000 + 4*w   instruction memory word w
//   0x1020_0000 + off   control registers (below)
// Instruction memory and registers form one local slave shared by the two
// masters with a round-robin arbiter.
//
// Registers (offset: content):
//   0x00 CE_CTRL    write bit0 = start CE job; read {wdma_busy, adma_busy, ce_busy}
//   0x04 CE_CFG0    fs5[0] zp_en[1] use_yin[2] relu_en[3] pool_en[5:4]
//                   pool_method[7:6] shift[12:8]
//   0x08 CE_DIM     width[15:0] height[31:16] (pixels / rows)
//   0x0C CE_EN      x_en[11:0] y_en[19:16]
//   0x10 CE_WM_BASE weight memory row of the job's coefficients
//   0x14 STATUS     sticky done flags ce[0] adma[1] wdma[2]; write 1 to clear
//   0x18 STDOUT     write: character to the host's standard output
//   0x1C IRQ        write: one-cycle notification pulse to the host
//   0x20..0x2C      ADMA_EXT, ADMA_TCDM (word address), ADMA_LEN (beats),
//                   ADMA_CTRL (write: bit0 start, bit1 dir = store)
//   0x30..0x3C      WDMA_EXT, WDMA_WM (64-bit slot), WDMA_LEN, WDMA_CTRL (bit0 start)
//   0x40..0x6C      X_BASE[0..11]    TCDM word addresses of the input features
//   0x70..0x7C      YIN_BASE[0..3]
//   0x80..0x8C      YOUT_BASE[0..3]
//
// Published: the CE, the DMAs and the pooling/ReLU stages are controlled via
// memory-mapped registers reachable by the micro-controller and the host,
// through an AXI-based interconnect, and a port carries standard output to
// the host. The register map, this simple request/grant bus in place of AXI
// and the busy/done bookkeeping are this design's choices. Runs on the
// low-speed clock; done inputs must already be in this clock domain.
module ctrl_bus
  import neuraghe_pkg::*;
#(
  parameter int unsigned IMEM_WORDS = 8192
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // masters: 0 = micro-controller data port, 1 = host
  input  logic [1:0]                        m_req,
  input  logic [1:0]                        m_we,
  input  logic [1:0][3:0]                   m_be,
  input  logic [1:0][31:0]                  m_addr,
  input  logic [1:0][31:0]                  m_wdata,
  output logic [1:0]                        m_gnt,
  output logic [1:0]                        m_rvalid,
  output logic [1:0][31:0]                  m_rdata,
  // towards the logarithmic interconnect (one port per master)
  output logic [1:0]                        l_req,
  output logic [1:0]                        l_we,
  output logic [1:0][3:0]                   l_be,
  output logic [1:0][TCDM_AW-1:0]           l_addr,
  output logic [1:0][WORD_W-1:0]            l_wdata,
  input  logic [1:0]                        l_gnt,
  input  logic [1:0]                        l_rvalid,
  input  logic [1:0][WORD_W-1:0]            l_rdata,
  // instruction memory bus port
  output logic                              im_req,
  output logic                              im_we,
  output logic [3:0]                        im_be,
  output logic [$clog2(IMEM_WORDS)-1:0]     im_addr,
  output logic [31:0]                       im_wdata,
  input  logic [31:0]                       im_rdata,
  // control of the CSP blocks
  output ce_cfg_t                           ce_cfg,
  output logic                              ce_start,
  input  logic                              ce_done,
  output logic                              adma_start,
  output logic                              adma_dir,
  output logic [31:0]                       adma_ext,
  output logic [TCDM_AW-1:0]                adma_tcdm,
  output logic [8:0]                        adma_len,
  input  logic                              adma_done,
  output logic                              wdma_start,
  output logic [31:0]                       wdma_ext,
  output logic [11:0]                       wdma_wm,
  output logic [8:0]                        wdma_len,
  input  logic                              wdma_done,
  output logic                              stdout_valid,
  output logic [7:0]                        stdout_data,
  output logic                              irq_gpp
);
  localparam logic [11:0] SEG_TCDM = 12'h100;
  localparam logic [11:0] SEG_IMEM = 12'h101;
  localparam logic [11:0] SEG_REGS = 12'h102;

  logic [1:0] is_tcdm, is_loc;
  logic       rr_q;                  // local arbiter: master with priority
  logic [1:0] loc_gnt;
  logic       sel;                   // winning master of the local slave
  logic [1:0] loc_rvalid_q;
  logic       loc_was_imem_q;
  logic [31:0] reg_rdata_q;
  logic       ce_busy, adma_busy, wdma_busy;
  logic [2:0] status_q;
  logic [5:0] widx;

  always_comb begin
    for (int m = 0; m < 2; m++) begin
      l_req[m]   = m_req[m] && (m_addr[m][31:20] == SEG_TCDM);
      l_we[m]    = m_we[m];
      l_be[m]    = m_be[m];
      l_addr[m]  = m_addr[m][TCDM_AW+1:2];
      l_wdata[m] = m_wdata[m];
    end
  end

  always_comb begin
    for (int m = 0; m < 2; m++) begin
      is_tcdm[m] = m_req[m] && (m_addr[m][31:20] == SEG_TCDM);
      is_loc[m]  = m_req[m] && (m_addr[m][31:20] == SEG_IMEM || m_addr[m][31:20] == SEG_REGS);
    end
    loc_gnt = '0;
    sel     = 1'b0;
    if (is_loc[rr_q]) begin
      loc_gnt[rr_q] = 1'b1; sel = rr_q;
    end else if (is_loc[~rr_q]) begin
      loc_gnt[~rr_q] = 1'b1; sel = ~rr_q;
    end
    for (int m = 0; m < 2; m++) m_gnt[m] = (is_tcdm[m] && l_gnt[m]) || loc_gnt[m];
    im_req   = (|loc_gnt) && (m_addr[sel][31:20] == SEG_IMEM);
    im_we    = m_we[sel];
    im_be    = m_be[sel];
    im_addr  = m_addr[sel][$clog2(IMEM_WORDS)+1:2];
    im_wdata = m_wdata[sel];
    widx     = m_addr[sel][7:2];
    for (int m = 0; m < 2; m++) begin
      m_rvalid[m] = l_rvalid[m] || loc_rvalid_q[m];
      m_rdata[m]  = l_rvalid[m] ? l_rdata[m] : (loc_was_imem_q ? im_rdata : reg_rdata_q);
    end
  end

  logic reg_wr, reg_rd;
  assign reg_wr = (|loc_gnt) && (m_addr[sel][31:20] == SEG_REGS) && m_we[sel];
  assign reg_rd = (|loc_gnt) && (m_addr[sel][31:20] == SEG_REGS) && !m_we[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_q <= 1'b0; loc_rvalid_q <= '0; loc_was_imem_q <= 1'b0; reg_rdata_q <= '0;
      ce_cfg <= '0; ce_start <= 1'b0; adma_start <= 1'b0; adma_dir <= 1'b0;
      adma_ext <= '0; adma_tcdm <= '0; adma_len <= '0; wdma_start <= 1'b0;
      wdma_ext <= '0; wdma_wm <= '0; wdma_len <= '0; stdout_valid <= 1'b0;
      stdout_data <= '0; irq_gpp <= 1'b0; ce_busy <= 1'b0; adma_busy <= 1'b0;
      wdma_busy <= 1'b0; status_q <= '0;
    end else begin
      ce_start <= 1'b0; adma_start <= 1'b0; wdma_start <= 1'b0;
      stdout_valid <= 1'b0; irq_gpp <= 1'b0;
      loc_rvalid_q <= loc_gnt;
      if (|loc_gnt) begin
        rr_q           <= ~sel;
        loc_was_imem_q <= (m_addr[sel][31:20] == SEG_IMEM);
      end
      if (ce_done)   begin ce_busy   <= 1'b0; status_q[0] <= 1'b1; end
      if (adma_done) begin adma_busy <= 1'b0; status_q[1] <= 1'b1; end
      if (wdma_done) begin wdma_busy <= 1'b0; status_q[2] <= 1'b1; end
      if (reg_wr) begin
        unique case (widx)
          6'd0:  if (m_wdata[sel][0]) begin ce_start <= 1'b1; ce_busy <= 1'b1; end
          6'd1:  begin
            ce_cfg.fs5         <= m_wdata[sel][0];
            ce_cfg.zp_en       <= m_wdata[sel][1];
            ce_cfg.use_yin     <= m_wdata[sel][2];
            ce_cfg.relu_en     <= m_wdata[sel][3];
            ce_cfg.pool_en     <= m_wdata[sel][5:4];
            ce_cfg.pool_method <= pool_method_e'(m_wdata[sel][7:6]);
            ce_cfg.shift       <= m_wdata[sel][12:8];
          end
          6'd2:  begin ce_cfg.width <= m_wdata[sel][15:0]; ce_cfg.height <= m_wdata[sel][31:16]; end
          6'd3:  begin ce_cfg.x_en <= m_wdata[sel][11:0]; ce_cfg.y_en <= m_wdata[sel][19:16]; end
          6'd4:  ce_cfg.wm_base <= m_wdata[sel][WM_AW-1:0];
          6'd5:  status_q <= status_q & ~m_wdata[sel][2:0];
          6'd6:  begin stdout_valid <= 1'b1; stdout_data <= m_wdata[sel][7:0]; end
          6'd7:  irq_gpp <= 1'b1;
          6'd8:  adma_ext  <= m_wdata[sel];
          6'd9:  adma_tcdm <= m_wdata[sel][TCDM_AW-1:0];
          6'd10: adma_len  <= m_wdata[sel][8:0];
          6'd11: if (m_wdata[sel][0]) begin
                   adma_start <= 1'b1; adma_dir <= m_wdata[sel][1]; adma_busy <= 1'b1;
                 end
          6'd12: wdma_ext <= m_wdata[sel];
          6'd13: wdma_wm  <= m_wdata[sel][11:0];
          6'd14: wdma_len <= m_wdata[sel][8:0];
          6'd15: if (m_wdata[sel][0]) begin wdma_start <= 1'b1; wdma_busy <= 1'b1; end
          default: begin
            if (widx >= 6'd16 && widx < 6'd28) ce_cfg.x_base[widx - 6'd16]    <= m_wdata[sel][TCDM_AW-1:0];
            if (widx >= 6'd28 && widx < 6'd32) ce_cfg.yin_base[widx - 6'd28]  <= m_wdata[sel][TCDM_AW-1:0];
            if (widx >= 6'd32 && widx < 6'd36) ce_cfg.yout_base[widx - 6'd32] <= m_wdata[sel][TCDM_AW-1:0];
          end
        endcase
      end
      if (reg_rd) begin
        unique case (widx)
          6'd0:  reg_rdata_q <= {29'd0, wdma_busy, adma_busy, ce_busy};
          6'd1:  reg_rdata_q <= {19'd0, ce_cfg.shift, ce_cfg.pool_method, ce_cfg.pool_en,
                                 ce_cfg.relu_en, ce_cfg.use_yin, ce_cfg.zp_en, ce_cfg.fs5};
          6'd2:  reg_rdata_q <= {ce_cfg.height, ce_cfg.width};
          6'd3:  reg_rdata_q <= {12'd0, ce_cfg.y_en, 4'd0, ce_cfg.x_en};
          6'd4:  reg_rdata_q <= 32'(ce_cfg.wm_base);
          6'd5:  reg_rdata_q <= {29'd0, status_q};
          6'd8:  reg_rdata_q <= adma_ext;
          6'd9:  reg_rdata_q <= 32'(adma_tcdm);
          6'd10: reg_rdata_q <= 32'(adma_len);
          6'd12: reg_rdata_q <= wdma_ext;
          6'd13: reg_rdata_q <= 32'(wdma_wm);
          6'd14: reg_rdata_q <= 32'(wdma_len);
          default: begin
            reg_rdata_q <= '0;
            if (widx >= 6'd16 && widx < 6'd28) reg_rdata_q <= 32'(ce_cfg.x_base[widx - 6'd16]);
            if (widx >= 6'd28 && widx < 6'd32) reg_rdata_q <= 32'(ce_cfg.yin_base[widx - 6'd28]);
            if (widx >= 6'd32 && widx < 6'd36) reg_rdata_q <= 32'(ce_cfg.yout_base[widx - 6'd32]);
          end
        endcase
      end
    end
  end

  a_one_local: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(loc_gnt));

endmodule
