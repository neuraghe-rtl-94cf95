// ce_xbar: crossbar between the Convolution Engine ports and the TCDM.
//
// N_PORTS CE ports (12 x_in, 4 y_in, 4 y_out) reach port A of the N_BANKS
// TCDM banks. Addresses are word addresses; the TCDM is word interleaved, so
// the bank is addr mod N_BANKS and the row addr / N_BANKS. When several
// ports address one bank in a cycle, the highest-numbered port is granted and
// the others see p_gnt low and must retry. Read data return one cycle after
// the grant on p_rdata of the granted port.
//
// Published: a simple crossbar giving the CE direct access to one port of
// every bank. Interleaving and fixed-priority conflict resolution are this
// design's choices; with the CE numbering (x_in 0..11, y_in 12..15, y_out
// 16..19) writes win over reads, so a conflict costs a prefetching read port
// one cycle instead of holding the whole CE datapath. Runs on the high-speed clock.
module ce_xbar
  import neuraghe_pkg::*;
#(
  parameter int unsigned N_PORTS    = N_CE_PORT,
  parameter int unsigned BANK_WORDS = 1024
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  logic [N_PORTS-1:0]                         p_req,
  input  logic [N_PORTS-1:0]                         p_we,
  input  logic [N_PORTS-1:0][TCDM_AW-1:0]            p_addr,
  input  logic [N_PORTS-1:0][WORD_W-1:0]             p_wdata,
  output logic [N_PORTS-1:0]                         p_gnt,
  output logic [N_PORTS-1:0][WORD_W-1:0]             p_rdata,
  output logic [N_BANKS-1:0]                         b_req,
  output logic [N_BANKS-1:0]                         b_we,
  output logic [N_BANKS-1:0][$clog2(BANK_WORDS)-1:0] b_addr,
  output logic [N_BANKS-1:0][WORD_W-1:0]             b_wdata,
  input  logic [N_BANKS-1:0][WORD_W-1:0]             b_rdata
);
  localparam int unsigned BW = $clog2(N_BANKS);
  localparam int unsigned RW = $clog2(BANK_WORDS);

  logic [N_PORTS-1:0][BW-1:0] bank_of;
  logic [N_PORTS-1:0][BW-1:0] bank_q;

  always_comb begin
    logic [N_BANKS-1:0] taken;
    taken   = '0;
    b_req   = '0;
    b_we    = '0;
    b_addr  = '0;
    b_wdata = '0;
    p_gnt   = '0;
    for (int p = N_PORTS - 1; p >= 0; p--) begin
      bank_of[p] = p_addr[p][BW-1:0];
      if (p_req[p] && !taken[bank_of[p]]) begin
        taken[bank_of[p]]   = 1'b1;
        p_gnt[p]            = 1'b1;
        b_req[bank_of[p]]   = 1'b1;
        b_we[bank_of[p]]    = p_we[p];
        b_addr[bank_of[p]]  = p_addr[p][BW +: RW];
        b_wdata[bank_of[p]] = p_wdata[p];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bank_q <= '0;
    else
      for (int p = 0; p < N_PORTS; p++)
        if (p_gnt[p]) bank_q[p] <= bank_of[p];
  end

  always_comb
    for (int p = 0; p < N_PORTS; p++) p_rdata[p] = b_rdata[bank_q[p]];

endmodule
