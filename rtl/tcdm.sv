// tcdm: tightly-coupled data memory of the CSP.
//
// N_BANKS banks of BANK_WORDS x 32-bit dual-port RAM. Port A of every bank
// belongs to the Convolution Engine crossbar and runs on the high-speed
// clock; port B belongs to the logarithmic interconnect (micro-controller,
// activation DMA, host) and runs on the low-speed clock. Bank selection and
// interleaving are done by the interconnects; this block only holds the
// banks. Both ports read with one cycle of latency; port B has byte enables.
// Accesses of the two ports to the same word in the same cycle are not
// ordered (as with the FPGA block RAM it models).
//
// Published: 32 banks of dual-port BRAM, each port on its own clock. The
// depth is this design's choice. The memory array is written from two
// clocked processes, the dual-clock RAM template, so plain always blocks are
// used instead of always_ff. Lint tools report the array as driven by two
// differently clocked blocks: that is the intended true dual-port RAM.
module tcdm
  import neuraghe_pkg::*;
#(
  parameter int unsigned BANK_WORDS = 1024
) (
  input  logic                                       clk_a,
  input  logic [N_BANKS-1:0]                         a_req,
  input  logic [N_BANKS-1:0]                         a_we,
  input  logic [N_BANKS-1:0][$clog2(BANK_WORDS)-1:0] a_addr,
  input  logic [N_BANKS-1:0][WORD_W-1:0]             a_wdata,
  output logic [N_BANKS-1:0][WORD_W-1:0]             a_rdata,
  input  logic                                       clk_b,
  input  logic [N_BANKS-1:0]                         b_req,
  input  logic [N_BANKS-1:0]                         b_we,
  input  logic [N_BANKS-1:0][3:0]                    b_be,
  input  logic [N_BANKS-1:0][$clog2(BANK_WORDS)-1:0] b_addr,
  input  logic [N_BANKS-1:0][WORD_W-1:0]             b_wdata,
  output logic [N_BANKS-1:0][WORD_W-1:0]             b_rdata
);
  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    logic [WORD_W-1:0] ram [BANK_WORDS];

    always @(posedge clk_a) begin
      if (a_req[b]) begin
        if (a_we[b]) ram[a_addr[b]] <= a_wdata[b];
        else         a_rdata[b]     <= ram[a_addr[b]];
      end
    end

    always @(posedge clk_b) begin
      if (b_req[b]) begin
        if (b_we[b]) begin
          for (int k = 0; k < 4; k++)
            if (b_be[b][k]) ram[b_addr[b]][8*k +: 8] <= b_wdata[b][8*k +: 8];
        end else begin
          b_rdata[b] <= ram[b_addr[b]];
        end
      end
    end
  end
endmodule
