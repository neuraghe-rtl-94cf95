// tb_adma: self-checking test of the activation DMA.
//
// Behavioural AXI read and write slaves (random ready/valid gaps) hold a DDR
// array; a behavioural TCDM port grants requests at random and answers reads
// one cycle after the grant. Loads must write every 64-bit beat as two TCDM
// words (low half first) from the programmed word address on; stores must
// read the words back in the same order and write them as one burst with
// w_last on the final beat and wait for the write response. Each transfer
// must issue exactly one burst, pulse done once, and take at most the cycles
// of the protocol steps (3 per loaded beat, 5 per stored beat) plus the wait
// cycles inserted by the slaves plus a small fixed overhead.
module tb_adma;
  import neuraghe_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, dir = 1'b0, busy, done;
  logic [31:0] ext_addr = '0;
  logic [TCDM_AW-1:0] tcdm_addr = '0;
  logic [8:0] len_beats = '0;
  logic ar_valid, ar_ready = 1'b0, r_valid = 1'b0, r_ready, r_last = 1'b0;
  logic [31:0] ar_addr, aw_addr;
  logic [7:0] ar_len, aw_len;
  logic [63:0] r_data = '0, w_data;
  logic aw_valid, aw_ready = 1'b0, w_valid, w_ready = 1'b0, w_last, b_valid = 1'b0, b_ready;
  logic t_req, t_we, t_gnt, t_rvalid = 1'b0;
  logic [3:0] t_be;
  logic [TCDM_AW-1:0] t_addr;
  logic [WORD_W-1:0] t_wdata, t_rdata = '0;
  adma dut (.clk, .rst_n, .start, .dir, .ext_addr, .tcdm_addr, .len_beats, .busy, .done,
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .r_valid, .r_ready, .r_data, .r_last,
    .aw_valid, .aw_ready, .aw_addr, .aw_len, .w_valid, .w_ready, .w_data, .w_last, .b_valid, .b_ready,
    .t_req, .t_we, .t_be, .t_addr, .t_wdata, .t_gnt, .t_rvalid, .t_rdata);

  int checks = 0, failures = 0, gaps = 0, n_done = 0, n_bursts = 0;
  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] ddr [2048];
  logic [31:0] tcdm [4096];

  // TCDM port: random grant, read data one cycle after the grant
  logic gnt_r = 1'b0;
  assign t_gnt = t_req && gnt_r;
  always @(posedge clk) begin
    gnt_r <= ($urandom_range(3) != 0);
    if (t_req && !t_gnt) gaps++;
    t_rvalid <= t_gnt;
    if (t_gnt) begin
      if (t_we) tcdm[t_addr[11:0]] <= t_wdata;
      else t_rdata <= tcdm[t_addr[11:0]];
    end
    if (rst_n && done) n_done++;
  end

  initial begin : rd_slave
    forever begin
      logic [31:0] a;
      int n;
      @(posedge clk); #1;
      ar_ready = ($urandom_range(2) != 0);
      if (ar_valid && !ar_ready) gaps++;
      if (ar_valid && ar_ready) begin
        a = ar_addr; n = int'(ar_len) + 1; n_bursts++;
        @(posedge clk); #1 ar_ready = 1'b0;
        for (int k = 0; k < n; k++) begin
          while ($urandom_range(2) == 0) begin gaps++; @(posedge clk); #1; end
          r_valid = 1'b1; r_data = ddr[(a >> 3) + 32'(k)]; r_last = (k == n - 1);
          do @(posedge clk); while (!r_ready);
          #1 r_valid = 1'b0; r_last = 1'b0;
        end
      end
    end
  end
  initial begin : wr_slave
    forever begin
      logic [31:0] a;
      int n;
      @(posedge clk); #1;
      aw_ready = ($urandom_range(2) != 0);
      if (aw_valid && !aw_ready) gaps++;
      if (aw_valid && aw_ready) begin
        a = aw_addr; n = int'(aw_len) + 1; n_bursts++;
        @(posedge clk); #1 aw_ready = 1'b0;
        for (int k = 0; k < n; k++) begin
          while ($urandom_range(2) == 0) begin gaps++; @(posedge clk); #1; end
          w_ready = 1'b1;
          do @(posedge clk); while (!w_valid);
          ddr[(a >> 3) + 32'(k)] = w_data;
          checks++;
          if (w_last !== (k == n - 1)) begin failures++; $display("FAIL w_last at beat %0d", k); end
          #1 w_ready = 1'b0;
        end
        gaps += 2;
        @(posedge clk); @(posedge clk); #1;
        b_valid = 1'b1;
        do @(posedge clk); while (!b_ready);
        #1 b_valid = 1'b0;
      end
    end
  end

  task automatic xfer(input logic d, input int ext, input int tw, input int n);
    int cyc, g0, d0, b0;
    g0 = gaps; d0 = n_done; b0 = n_bursts;
    @(posedge clk); #1;
    start = 1'b1; dir = d; ext_addr = 32'(ext); tcdm_addr = TCDM_AW'(tw); len_beats = 9'(n);
    @(posedge clk); #1 start = 1'b0;
    cyc = 0;
    while (!done && cyc < 20000) begin @(posedge clk); #1 cyc++; end
    @(posedge clk); #1;
    checks++;
    if (cyc > (d ? 5 : 3) * n + (gaps - g0) + 6) begin
      failures++; $display("FAIL dir %0d: %0d beats took %0d cycles (%0d wait cycles)", d, n, cyc, gaps - g0);
    end
    checks++;
    if (n_done - d0 != 1 || n_bursts - b0 != 1) begin failures++; $display("FAIL done/burst count"); end
  endtask

  initial begin
    for (int i = 0; i < 2048; i++) ddr[i] = {$urandom, $urandom};
    for (int i = 0; i < 4096; i++) tcdm[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // loads
    xfer(1'b0, 0, 100, 64);
    xfer(1'b0, 8 * 200, 1001, 1);
    xfer(1'b0, 8 * 300, 2000, 256);
    for (int k = 0; k < 64; k++) begin
      checks++;
      if ({tcdm[101 + 2*k], tcdm[100 + 2*k]} !== ddr[k]) begin
        failures++; if (failures < 10) $display("FAIL load beat %0d", k);
      end
    end
    checks++;
    if ({tcdm[1002], tcdm[1001]} !== ddr[200]) begin failures++; $display("FAIL single-beat load"); end
    for (int k = 0; k < 256; k++) begin
      checks++;
      if ({tcdm[2001 + 2*k], tcdm[2000 + 2*k]} !== ddr[300 + k]) begin
        failures++; if (failures < 10) $display("FAIL long load beat %0d", k);
      end
    end
    // stores: TCDM words back to another DDR area
    xfer(1'b1, 8 * 1000, 100, 64);
    xfer(1'b1, 8 * 1500, 2000, 256);
    for (int k = 0; k < 64; k++) begin
      checks++;
      if (ddr[1000 + k] !== ddr[k]) begin failures++; if (failures < 10) $display("FAIL store beat %0d", k); end
    end
    for (int k = 0; k < 256; k++) begin
      checks++;
      if (ddr[1500 + k] !== ddr[300 + k]) begin failures++; if (failures < 10) $display("FAIL long store beat %0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
