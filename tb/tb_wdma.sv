// tb_wdma: self-checking test of the weight DMA.
//
// A behavioural AXI read slave with random address-ready and data-valid gaps
// serves bursts from a DDR array. Each transfer must issue one burst at the
// programmed address with ar_len = len - 1, write beat k to weight-memory
// slot wm_addr + k with the DDR word, pulse done exactly once, and take no
// more than the beats plus the slave's wait cycles plus a small fixed
// overhead.
module tb_wdma;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  logic [31:0] ext_addr = '0;
  logic [11:0] wm_addr = '0;
  logic [8:0] len_beats = '0;
  logic ar_valid, ar_ready = 1'b0, r_valid = 1'b0, r_ready, r_last = 1'b0, wm_wr_en;
  logic [31:0] ar_addr;
  logic [7:0] ar_len;
  logic [63:0] r_data = '0, wm_wr_data;
  logic [11:0] wm_wr_addr;
  wdma #(.WM_SLOT_W(12)) dut (.clk, .rst_n, .start, .ext_addr, .wm_addr, .len_beats, .busy, .done,
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .r_valid, .r_ready, .r_data, .r_last,
    .wm_wr_en, .wm_wr_addr, .wm_wr_data);

  int checks = 0, failures = 0, gaps = 0, n_done = 0, n_ar = 0;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] ddr [1024];
  logic [63:0] wm [4096];
  always @(posedge clk) if (rst_n) begin
    if (wm_wr_en) wm[wm_wr_addr] <= wm_wr_data;
    if (done) n_done++;
  end

  // AXI read slave
  initial begin
    forever begin
      logic [31:0] a;
      int n;
      @(posedge clk); #1;
      ar_ready = ($urandom_range(2) != 0);
      if (!ar_ready && ar_valid) gaps++;
      if (ar_valid && ar_ready) begin
        a = ar_addr; n = int'(ar_len) + 1; n_ar++;
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

  task automatic xfer(input int ext, input int slot, input int n);
    int cyc, g0, d0, a0;
    for (int k = 0; k < n; k++) wm[slot + k] = '0;
    g0 = gaps; d0 = n_done; a0 = n_ar;
    @(posedge clk); #1;
    start = 1'b1; ext_addr = 32'(ext); wm_addr = 12'(slot); len_beats = 9'(n);
    @(posedge clk); #1 start = 1'b0;
    cyc = 0;
    while (!done && cyc < 5000) begin @(posedge clk); #1 cyc++; end
    @(posedge clk); #1;
    checks++;
    if (cyc > n + (gaps - g0) + 4) begin failures++; $display("FAIL %0d beats took %0d cycles", n, cyc); end
    checks++;
    if (n_done - d0 != 1 || n_ar - a0 != 1) begin failures++; $display("FAIL done/burst count"); end
    for (int k = 0; k < n; k++) begin
      checks++;
      if (wm[slot + k] !== ddr[ext / 8 + k]) begin
        failures++;
        if (failures < 10) $display("FAIL slot %0d: %h expected %h", slot + k, wm[slot + k], ddr[ext / 8 + k]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 1024; i++) ddr[i] = {$urandom, $urandom};
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    xfer(0, 0, 109);
    xfer(8 * 300, 24, 109);
    xfer(8 * 5, 4000, 1);
    xfer(8 * 700, 1000, 256);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
