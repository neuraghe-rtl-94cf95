// tb_ctrl_bus: self-checking test of the control bus and register file.
//
// Both masters (micro-controller and host) access the three address
// segments. Behavioural slaves stand in for the logarithmic interconnect
// (random grant, rvalid one cycle after the grant) and the instruction
// memory (registered read). Checked: TCDM requests are forwarded with the
// word address and data of their own master; instruction-memory and register
// accesses are granted in the request cycle when free and answered one cycle
// later; every configuration register reads back and drives the CE / DMA
// configuration outputs; writes to the start registers give one-cycle start
// pulses, busy bits follow start and done; done flags are sticky and clear
// on a write of one; the standard-output and notification registers pulse
// their outputs; two masters competing for the local slave alternate.
module tb_ctrl_bus;
  import neuraghe_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [1:0] m_req = '0, m_we = '0, m_gnt, m_rvalid;
  logic [1:0][3:0] m_be = '1;
  logic [1:0][31:0] m_addr = '0, m_wdata = '0, m_rdata;
  logic [1:0] l_req, l_we, l_gnt, l_rvalid = '0;
  logic [1:0][3:0] l_be;
  logic [1:0][TCDM_AW-1:0] l_addr;
  logic [1:0][WORD_W-1:0] l_wdata, l_rdata = '0;
  logic im_req, im_we;
  logic [3:0] im_be;
  logic [12:0] im_addr;
  logic [31:0] im_wdata, im_rdata = '0;
  ce_cfg_t ce_cfg;
  logic ce_start, ce_done = 1'b0, adma_start, adma_dir, adma_done = 1'b0;
  logic wdma_start, wdma_done = 1'b0, stdout_valid, irq_gpp;
  logic [31:0] adma_ext, wdma_ext;
  logic [TCDM_AW-1:0] adma_tcdm;
  logic [8:0] adma_len, wdma_len;
  logic [11:0] wdma_wm;
  logic [7:0] stdout_data;
  ctrl_bus #(.IMEM_WORDS(8192)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // behavioural TCDM side: random grant, data = function of the address
  logic [1:0] lg = '0;
  logic [1:0][TCDM_AW-1:0] la_q;
  assign l_gnt = l_req & lg;
  always @(posedge clk) begin
    lg <= 2'($urandom);
    l_rvalid <= l_gnt;
    for (int m = 0; m < 2; m++) if (l_gnt[m]) l_rdata[m] <= 32'hA500_0000 ^ 32'(l_addr[m]);
  end
  // behavioural instruction memory
  logic [31:0] imem [8192];
  always @(posedge clk) if (im_req) begin
    if (im_we) imem[im_addr] <= im_wdata;
    im_rdata <= imem[im_addr];
  end
  // pulse counters
  int n_ce = 0, n_ad = 0, n_wd = 0, n_so = 0, n_irq = 0;
  always @(posedge clk) if (rst_n) begin
    n_ce += int'(ce_start); n_ad += int'(adma_start); n_wd += int'(wdma_start);
    n_so += int'(stdout_valid); n_irq += int'(irq_gpp);
  end

  // one access of master m; returns read data and the cycles to the grant
  task automatic acc(input int m, input logic we, input logic [31:0] a, input logic [31:0] d,
                     output logic [31:0] q, output int wait_c);
    @(posedge clk); #1;
    m_req[m] = 1'b1; m_we[m] = we; m_addr[m] = a; m_wdata[m] = d;
    wait_c = 0;
    #1;
    while (!m_gnt[m]) begin @(posedge clk); #2 wait_c++; end
    if (a[31:20] == 12'h100) begin
      check(l_req[m] && l_addr[m] == TCDM_AW'(a[31:2]) && l_we[m] == we && (!we || l_wdata[m] == d),
            "TCDM request forwarded");
    end
    @(posedge clk); #1;
    m_req[m] = 1'b0; m_we[m] = 1'b0;
    check(m_rvalid[m] == 1'b1, "rvalid one cycle after grant");
    q = m_rdata[m];
  endtask
  localparam logic [31:0] R = 32'h1020_0000;
  task automatic wr(input int m, input logic [31:0] a, input logic [31:0] d);
    logic [31:0] q;
    int w;
    acc(m, 1'b1, a, d, q, w);
  endtask
  task automatic rd(input int m, input logic [31:0] a, output logic [31:0] q);
    int w;
    acc(m, 1'b0, a, 32'd0, q, w);
  endtask

  initial begin
    logic [31:0] q;
    int w;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // TCDM forwarding for both masters
    for (int i = 0; i < 20; i++) begin
      int m, wa;
      m = i % 2; wa = int'($urandom_range(32767));
      acc(m, 1'b0, 32'h1000_0000 + 32'(4 * wa), 32'd0, q, w);
      check(q == (32'hA500_0000 ^ 32'(wa)), "TCDM read data");
      acc(m, 1'b1, 32'h1000_0000 + 32'(4 * wa), $urandom, q, w);
    end
    // instruction memory through the bus
    for (int i = 0; i < 8; i++) wr(i % 2, 32'h1010_0000 + 32'(4 * i), 32'h1234_0000 + 32'(i));
    for (int i = 0; i < 8; i++) begin
      acc(1 - i % 2, 1'b0, 32'h1010_0000 + 32'(4 * i), 32'd0, q, w);
      check(q == 32'h1234_0000 + 32'(i) && w == 0, "instruction memory read, no wait");
    end
    // configuration registers
    wr(1, R + 32'h04, 32'h0000_07BD);
    rd(1, R + 32'h04, q);
    check(q == 32'h0000_07BD, "CFG0 readback");
    check(ce_cfg.fs5 && !ce_cfg.zp_en && ce_cfg.use_yin && ce_cfg.relu_en && ce_cfg.pool_en == 2'b11 &&
          ce_cfg.pool_method == POOL_DWN && ce_cfg.shift == 5'd7, "CFG0 fields");
    wr(0, R + 32'h08, {16'd10, 16'd224});
    rd(0, R + 32'h08, q);
    check(q == {16'd10, 16'd224} && ce_cfg.width == 16'd224 && ce_cfg.height == 16'd10, "DIM");
    wr(1, R + 32'h0C, 32'h000A_0ABC);
    rd(1, R + 32'h0C, q);
    check(q == 32'h000A_0ABC && ce_cfg.x_en == 12'hABC && ce_cfg.y_en == 4'hA, "EN");
    wr(1, R + 32'h10, 32'd77);
    check(ce_cfg.wm_base == WM_AW'(77), "WM_BASE");
    for (int f = 0; f < 12; f++) wr(f % 2, R + 32'h40 + 32'(4 * f), 32'(1000 + f));
    for (int o = 0; o < 4; o++) begin
      wr(1, R + 32'h70 + 32'(4 * o), 32'(2000 + o));
      wr(0, R + 32'h80 + 32'(4 * o), 32'(3000 + o));
    end
    for (int f = 0; f < 12; f++) begin
      rd(1, R + 32'h40 + 32'(4 * f), q);
      check(q == 32'(1000 + f) && ce_cfg.x_base[f] == TCDM_AW'(1000 + f), "X_BASE");
    end
    for (int o = 0; o < 4; o++)
      check(ce_cfg.yin_base[o] == TCDM_AW'(2000 + o) && ce_cfg.yout_base[o] == TCDM_AW'(3000 + o), "Y bases");
    // DMA registers and starts
    wr(1, R + 32'h20, 32'h0000_0040);
    wr(1, R + 32'h24, 32'd555);
    wr(1, R + 32'h28, 32'd200);
    rd(1, R + 32'h24, q);
    check(q == 32'd555 && adma_tcdm == TCDM_AW'(555) && adma_len == 9'd200, "ADMA registers");
    wr(1, R + 32'h2C, 32'd3);
    @(posedge clk); #1;  // the pulse follows the write's grant
    check(n_ad == 1 && adma_dir == 1'b1, "ADMA start pulse, store direction");
    rd(1, R + 32'h00, q);
    check(q[1] == 1'b1, "ADMA busy");
    @(posedge clk); #1 adma_done = 1'b1; @(posedge clk); #1 adma_done = 1'b0;
    rd(1, R + 32'h14, q);
    check(q[1] == 1'b1, "ADMA done sticky");
    rd(1, R + 32'h00, q);
    check(q[1] == 1'b0, "ADMA not busy after done");
    wr(1, R + 32'h14, 32'd2);
    rd(1, R + 32'h14, q);
    check(q[1] == 1'b0, "ADMA done cleared");
    wr(0, R + 32'h30, 32'h0000_8000);
    wr(0, R + 32'h34, 32'd24);
    wr(0, R + 32'h38, 32'd109);
    check(wdma_ext == 32'h8000 && wdma_wm == 12'd24 && wdma_len == 9'd109, "WDMA registers");
    wr(0, R + 32'h3C, 32'd1);
    @(posedge clk); #1;  // the pulse follows the write's grant
    check(n_wd == 1, "WDMA start pulse");
    @(posedge clk); #1 wdma_done = 1'b1; @(posedge clk); #1 wdma_done = 1'b0;
    // CE start and done
    wr(1, R + 32'h00, 32'd1);
    @(posedge clk); #1;  // the pulse follows the write's grant
    check(n_ce == 1, "CE start pulse");
    rd(0, R + 32'h00, q);
    check(q[0] == 1'b1, "CE busy");
    @(posedge clk); #1 ce_done = 1'b1; @(posedge clk); #1 ce_done = 1'b0;
    rd(0, R + 32'h14, q);
    check(q[2:0] == 3'b101, "CE and WDMA done flags");
    wr(0, R + 32'h14, 32'd1);
    rd(0, R + 32'h14, q);
    check(q[2:0] == 3'b100, "only the flag written with 1 is cleared");
    wr(0, R + 32'h14, 32'd4);
    rd(0, R + 32'h14, q);
    check(q[2:0] == 3'b000, "flags cleared");
    wr(1, R + 32'h00, 32'd0);
    @(posedge clk); #1;  // the pulse follows the write's grant
    check(n_ce == 1, "no start on a write of zero");
    // standard output and notification
    wr(0, R + 32'h18, 32'h41);
    @(posedge clk); #1;  // the pulse follows the write's grant
    check(n_so == 1 && stdout_data == 8'h41, "stdout character");
    wr(0, R + 32'h1C, 32'd1);
    @(posedge clk); #1;  // the pulse follows the write's grant
    check(n_irq == 1, "notification pulse");
    // both masters on the local slave in the same cycle: they alternate
    @(posedge clk); #1;
    m_req = 2'b11; m_we = 2'b00; m_addr[0] = R + 32'h08; m_addr[1] = R + 32'h0C;
    #1 check(m_gnt == 2'b01 || m_gnt == 2'b10, "one local grant");
    w = int'(m_gnt[1]);
    @(posedge clk); #2;
    check(int'(m_gnt[1]) == 1 - w && (m_gnt[0] ^ m_gnt[1]), "grant alternates");
    @(posedge clk); #1 m_req = 2'b00;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
