// tb_log_interconnect: self-checking test of the logarithmic interconnect.
//
// Three masters issue random reads and writes (with byte enables) that often
// collide on a few banks; a master keeps its request until granted, as the
// bus protocol requires. A reference round-robin arbiter per bank is kept
// here and the grants must match it every cycle; every grant must get rvalid
// one cycle later and reads the word of a shadow memory. The longest wait of
// any request must stay below the number of masters (no starvation).
module tb_log_interconnect;
  import neuraghe_pkg::*;

  localparam int NM = 3;
  localparam int BW = 16;
  localparam int RW = $clog2(BW);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NM-1:0] m_req = '0, m_we = '0, m_gnt, m_rvalid;
  logic [NM-1:0][3:0] m_be = '0;
  logic [NM-1:0][TCDM_AW-1:0] m_addr = '0;
  logic [NM-1:0][WORD_W-1:0] m_wdata = '0, m_rdata;
  logic [N_BANKS-1:0] b_req, b_we;
  logic [N_BANKS-1:0][3:0] b_be;
  logic [N_BANKS-1:0][RW-1:0] b_addr;
  logic [N_BANKS-1:0][WORD_W-1:0] b_wdata, b_rdata;
  log_interconnect #(.N_MASTERS(NM), .BANK_WORDS(BW)) dut (.clk, .rst_n, .m_req, .m_we, .m_be,
    .m_addr, .m_wdata, .m_gnt, .m_rvalid, .m_rdata, .b_req, .b_we, .b_be, .b_addr, .b_wdata, .b_rdata);

  logic [WORD_W-1:0] mem [N_BANKS][BW];
  always @(posedge clk)
    for (int b = 0; b < N_BANKS; b++)
      if (b_req[b]) begin
        if (b_we[b]) for (int k = 0; k < 4; k++) if (b_be[b][k]) mem[b][b_addr[b]][8*k +: 8] <= b_wdata[b][8*k +: 8];
        b_rdata[b] <= mem[b][b_addr[b]];
      end

  int checks = 0, failures = 0, max_wait = 0;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [WORD_W-1:0] shadow [N_BANKS][BW];
  int rr [N_BANKS];
  int waitc [NM];

  initial begin
    for (int b = 0; b < N_BANKS; b++) begin
      rr[b] = 0;
      for (int r = 0; r < BW; r++) begin mem[b][r] = $urandom; shadow[b][r] = mem[b][r]; end
    end
    for (int m = 0; m < NM; m++) waitc[m] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      logic [NM-1:0] exp_gnt;
      logic [N_BANKS-1:0] taken;
      for (int m = 0; m < NM; m++)
        if (!m_req[m]) begin  // new request only after the last was granted
          m_req[m] = ($urandom_range(3) != 0); m_we[m] = 1'($urandom); m_be[m] = 4'($urandom);
          m_addr[m] = TCDM_AW'($urandom_range(1) * N_BANKS + $urandom_range(2) + 32 * $urandom_range(3));
          m_wdata[m] = $urandom;
        end
      #1;
      taken = '0; exp_gnt = '0;
      for (int b = 0; b < N_BANKS; b++)
        for (int k = 0; k < NM; k++) begin
          int m;
          m = (rr[b] + k) % NM;
          if (!taken[b] && m_req[m] && int'(m_addr[m]) % N_BANKS == b) begin
            taken[b] = 1'b1; exp_gnt[m] = 1'b1; rr[b] = (m + 1) % NM;
          end
        end
      checks++;
      if (m_gnt !== exp_gnt) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d grant %b expected %b", i, m_gnt, exp_gnt);
      end
      for (int m = 0; m < NM; m++) begin
        if (m_req[m] && !exp_gnt[m]) waitc[m]++; else waitc[m] = 0;
        if (waitc[m] > max_wait) max_wait = waitc[m];
      end
      @(posedge clk); #1;
      for (int m = 0; m < NM; m++) begin
        checks++;
        if (m_rvalid[m] !== exp_gnt[m]) begin failures++; $display("FAIL rvalid master %0d", m); end
        if (exp_gnt[m]) begin
          int b, r;
          b = int'(m_addr[m]) % N_BANKS; r = int'(m_addr[m]) / N_BANKS;
          if (m_we[m]) begin
            for (int k = 0; k < 4; k++) if (m_be[m][k]) shadow[b][r][8*k +: 8] = m_wdata[m][8*k +: 8];
          end else begin
            checks++;
            if (m_rdata[m] !== shadow[b][r]) begin
              failures++;
              if (failures < 10) $display("FAIL master %0d read %h expected %h", m, m_rdata[m], shadow[b][r]);
            end
          end
        end
      end
      // a granted request is done; the master may issue the next one
      for (int m = 0; m < NM; m++) if (exp_gnt[m]) m_req[m] = 1'b0;
    end
    checks++;
    if (max_wait >= NM) begin failures++; $display("FAIL a request waited %0d cycles", max_wait); end
    $display("TB_RESULT checks=%0d failures=%0d (longest wait %0d)", checks, failures, max_wait);
    $finish;
  end
endmodule
