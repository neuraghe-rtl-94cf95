// tb_tcdm: self-checking test of the dual-clock TCDM banks.
//
// Port A runs on a 10-unit clock and port B on a 20-unit clock, as the CE
// and the low-speed domain. Port B writes random words with byte enables
// into every bank, port A reads them back; port A writes, port B reads back.
// Both read ports must return data one cycle of their own clock after the
// request. A shadow copy of the memory is kept here.
module tb_tcdm;
  import neuraghe_pkg::*;

  localparam int BW = 64;
  localparam int RW = $clog2(BW);
  logic clk_a = 1'b0, clk_b = 1'b0;
  always #5  clk_a = ~clk_a;
  always #10 clk_b = ~clk_b;

  logic [N_BANKS-1:0] a_req = '0, a_we = '0, b_req = '0, b_we = '0;
  logic [N_BANKS-1:0][RW-1:0] a_addr = '0, b_addr = '0;
  logic [N_BANKS-1:0][WORD_W-1:0] a_wdata = '0, a_rdata, b_wdata = '0, b_rdata;
  logic [N_BANKS-1:0][3:0] b_be = '0;
  tcdm #(.BANK_WORDS(BW)) dut (.clk_a, .a_req, .a_we, .a_addr, .a_wdata, .a_rdata,
                               .clk_b, .b_req, .b_we, .b_be, .b_addr, .b_wdata, .b_rdata);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (100000) @(posedge clk_b);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [WORD_W-1:0] shadow [N_BANKS][BW];

  initial begin
    // port B fills everything with full words
    for (int r = 0; r < BW; r++) begin
      @(posedge clk_b); #1;
      b_req = '1; b_we = '1; b_be = '1;
      for (int b = 0; b < N_BANKS; b++) begin
        b_addr[b] = RW'(r); b_wdata[b] = $urandom; shadow[b][r] = b_wdata[b];
      end
    end
    @(posedge clk_b); #1 b_req = '0; b_we = '0;
    for (int i = 0; i < 300; i++) begin
      int r [N_BANKS];
      logic [WORD_W-1:0] e [N_BANKS];
      case (i % 4)
        0: begin // port B partial writes
          @(posedge clk_b); #1;
          b_req = '1; b_we = '1;
          for (int b = 0; b < N_BANKS; b++) begin
            r[b] = int'($urandom_range(BW - 1)); b_addr[b] = RW'(r[b]); b_be[b] = 4'($urandom);
            b_wdata[b] = $urandom;
            for (int k = 0; k < 4; k++) if (b_be[b][k]) shadow[b][r[b]][8*k +: 8] = b_wdata[b][8*k +: 8];
          end
          @(posedge clk_b); #1 b_req = '0; b_we = '0;
        end
        1: begin // port A reads
          @(posedge clk_a); #1;
          a_req = '1; a_we = '0;
          for (int b = 0; b < N_BANKS; b++) begin
            r[b] = int'($urandom_range(BW - 1)); a_addr[b] = RW'(r[b]); e[b] = shadow[b][r[b]];
          end
          @(posedge clk_a); #1 a_req = '0;
          for (int b = 0; b < N_BANKS; b++) begin
            checks++;
            if (a_rdata[b] !== e[b]) begin
              failures++;
              if (failures < 10) $display("FAIL A read bank %0d row %0d: %h expected %h", b, r[b], a_rdata[b], e[b]);
            end
          end
        end
        2: begin // port A writes
          @(posedge clk_a); #1;
          a_req = '1; a_we = '1;
          for (int b = 0; b < N_BANKS; b++) begin
            r[b] = int'($urandom_range(BW - 1)); a_addr[b] = RW'(r[b]); a_wdata[b] = $urandom;
            shadow[b][r[b]] = a_wdata[b];
          end
          @(posedge clk_a); #1 a_req = '0; a_we = '0;
        end
        default: begin // port B reads
          @(posedge clk_b); #1;
          b_req = '1; b_we = '0;
          for (int b = 0; b < N_BANKS; b++) begin
            r[b] = int'($urandom_range(BW - 1)); b_addr[b] = RW'(r[b]); e[b] = shadow[b][r[b]];
          end
          @(posedge clk_b); #1 b_req = '0;
          for (int b = 0; b < N_BANKS; b++) begin
            checks++;
            if (b_rdata[b] !== e[b]) begin
              failures++;
              if (failures < 10) $display("FAIL B read bank %0d row %0d: %h expected %h", b, r[b], b_rdata[b], e[b]);
            end
          end
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
