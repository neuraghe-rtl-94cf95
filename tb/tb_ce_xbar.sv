// tb_ce_xbar: self-checking test of the CE crossbar.
//
// Twenty ports issue random reads and writes to a small word-interleaved
// address space held in a behavioural bank memory with one cycle of read
// latency. Every cycle the testbench checks, for each bank, that exactly the
// highest-numbered requesting port of that bank is granted, that the bank
// sees that port's address, data and write enable, and, one cycle later,
// that each granted read returns the word of its own address. A shadow copy
// of the memory is kept here.
module tb_ce_xbar;
  import neuraghe_pkg::*;

  localparam int NP = N_CE_PORT;
  localparam int BW = 16;
  localparam int RW = $clog2(BW);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NP-1:0] p_req = '0, p_we = '0, p_gnt;
  logic [NP-1:0][TCDM_AW-1:0] p_addr = '0;
  logic [NP-1:0][WORD_W-1:0] p_wdata = '0, p_rdata;
  logic [N_BANKS-1:0] b_req, b_we;
  logic [N_BANKS-1:0][RW-1:0] b_addr;
  logic [N_BANKS-1:0][WORD_W-1:0] b_wdata, b_rdata;
  ce_xbar #(.N_PORTS(NP), .BANK_WORDS(BW)) dut (.clk, .rst_n, .p_req, .p_we, .p_addr, .p_wdata,
    .p_gnt, .p_rdata, .b_req, .b_we, .b_addr, .b_wdata, .b_rdata);

  logic [WORD_W-1:0] mem [N_BANKS][BW];
  always @(posedge clk)
    for (int b = 0; b < N_BANKS; b++)
      if (b_req[b]) begin
        if (b_we[b]) mem[b][b_addr[b]] <= b_wdata[b];
        b_rdata[b] <= mem[b][b_addr[b]];
      end

  int checks = 0, failures = 0, conflicts = 0;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [WORD_W-1:0] shadow [N_BANKS][BW];

  initial begin
    for (int b = 0; b < N_BANKS; b++) for (int r = 0; r < BW; r++) begin
      mem[b][r] = $urandom; shadow[b][r] = mem[b][r];
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      logic [NP-1:0] exp_gnt;
      logic [N_BANKS-1:0] taken;
      for (int p = 0; p < NP; p++) begin
        p_req[p] = 1'($urandom); p_we[p] = 1'($urandom);
        // a narrow address range makes bank conflicts frequent
        p_addr[p] = TCDM_AW'($urandom_range(N_BANKS * BW - 1));
        if (i % 2 == 0) p_addr[p] = TCDM_AW'($urandom_range(3) * N_BANKS + $urandom_range(7));
        p_wdata[p] = $urandom;
      end
      #1;
      taken = '0; exp_gnt = '0;
      for (int p = NP - 1; p >= 0; p--)
        if (p_req[p]) begin
          if (!taken[p_addr[p] % N_BANKS]) begin
            taken[p_addr[p] % N_BANKS] = 1'b1; exp_gnt[p] = 1'b1;
          end else conflicts++;
        end
      checks++;
      if (p_gnt !== exp_gnt) begin
        failures++;
        if (failures < 10) $display("FAIL grant %b expected %b", p_gnt, exp_gnt);
      end
      for (int p = 0; p < NP; p++) if (exp_gnt[p]) begin
        int b, r;
        b = int'(p_addr[p]) % N_BANKS; r = int'(p_addr[p]) / N_BANKS;
        checks++;
        if (!b_req[b] || b_we[b] !== p_we[p] || int'(b_addr[b]) != r || (p_we[p] && b_wdata[b] !== p_wdata[p])) begin
          failures++;
          if (failures < 10) $display("FAIL bank %0d not driven by port %0d", b, p);
        end
      end
      @(posedge clk); #1;
      // granted reads return their word one cycle after the grant
      for (int p = 0; p < NP; p++) if (exp_gnt[p]) begin
        int b, r;
        b = int'(p_addr[p]) % N_BANKS; r = int'(p_addr[p]) / N_BANKS;
        if (p_we[p]) shadow[b][r] = p_wdata[p];
        else begin
          checks++;
          if (p_rdata[p] !== shadow[b][r]) begin
            failures++;
            if (failures < 10) $display("FAIL port %0d read %h expected %h", p, p_rdata[p], shadow[b][r]);
          end
        end
      end
    end
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no conflicts generated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
