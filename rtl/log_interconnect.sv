// log_interconnect: logarithmic interconnect (LIC) of the low-speed domain.
//
// Connects N_MASTERS 32-bit masters (micro-controller data port, host slave
// port, activation DMA) to port B of the N_BANKS word-interleaved TCDM banks.
// A request (req, we, be, word address, wdata) is granted in the same cycle
// when it wins its bank; each bank has its own round-robin arbiter, so no
// master can starve. Every granted request gets rvalid one cycle later, with
// rdata for reads.
//
// Published: one TCDM port shared by all masters except the CE through a
// low-latency logarithmic interconnect that grants one request per bank per
// cycle with a round-robin, starvation-free protocol. Here it is a flat
// per-bank arbiter rather than a tree of 2:1 nodes (same behaviour);
// interleaving and the rvalid handshake are this design's choices.
module log_interconnect
  import neuraghe_pkg::*;
#(
  parameter int unsigned N_MASTERS  = 3,
  parameter int unsigned BANK_WORDS = 1024
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  logic [N_MASTERS-1:0]                       m_req,
  input  logic [N_MASTERS-1:0]                       m_we,
  input  logic [N_MASTERS-1:0][3:0]                  m_be,
  input  logic [N_MASTERS-1:0][TCDM_AW-1:0]          m_addr,
  input  logic [N_MASTERS-1:0][WORD_W-1:0]           m_wdata,
  output logic [N_MASTERS-1:0]                       m_gnt,
  output logic [N_MASTERS-1:0]                       m_rvalid,
  output logic [N_MASTERS-1:0][WORD_W-1:0]           m_rdata,
  output logic [N_BANKS-1:0]                         b_req,
  output logic [N_BANKS-1:0]                         b_we,
  output logic [N_BANKS-1:0][3:0]                    b_be,
  output logic [N_BANKS-1:0][$clog2(BANK_WORDS)-1:0] b_addr,
  output logic [N_BANKS-1:0][WORD_W-1:0]             b_wdata,
  input  logic [N_BANKS-1:0][WORD_W-1:0]             b_rdata
);
  localparam int unsigned BW = $clog2(N_BANKS);
  localparam int unsigned RW = $clog2(BANK_WORDS);
  localparam int unsigned MW = (N_MASTERS > 1) ? $clog2(N_MASTERS) : 1;

  logic [N_BANKS-1:0][MW-1:0] rr_q;      // master with the highest priority next
  logic [N_BANKS-1:0][MW-1:0] win;
  logic [N_BANKS-1:0]         won;
  logic [N_MASTERS-1:0][BW-1:0] bank_q;

  always_comb begin
    for (int b = 0; b < N_BANKS; b++) begin
      won[b] = 1'b0;
      win[b] = '0;
      for (int i = 0; i < N_MASTERS; i++) begin
        int m;
        m = (int'(rr_q[b]) + i) % N_MASTERS;
        if (!won[b] && m_req[m] && int'(m_addr[m][BW-1:0]) == b) begin
          won[b] = 1'b1;
          win[b] = MW'(m);
        end
      end
      b_req[b]   = won[b];
      b_we[b]    = m_we[win[b]];
      b_be[b]    = m_be[win[b]];
      b_addr[b]  = m_addr[win[b]][BW +: RW];
      b_wdata[b] = m_wdata[win[b]];
    end
    for (int m = 0; m < N_MASTERS; m++)
      m_gnt[m] = m_req[m] && won[m_addr[m][BW-1:0]] && (int'(win[m_addr[m][BW-1:0]]) == m);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_q     <= '0;
      m_rvalid <= '0;
      bank_q   <= '0;
    end else begin
      for (int b = 0; b < N_BANKS; b++)
        if (won[b]) rr_q[b] <= MW'((int'(win[b]) + 1) % N_MASTERS);
      m_rvalid <= m_gnt;
      for (int m = 0; m < N_MASTERS; m++)
        if (m_gnt[m]) bank_q[m] <= m_addr[m][BW-1:0];
    end
  end

  always_comb
    for (int m = 0; m < N_MASTERS; m++) m_rdata[m] = b_rdata[bank_q[m]];

  // a grant is only ever given to a requesting master
  a_gnt_req: assert property (@(posedge clk) disable iff (!rst_n) (m_gnt & ~m_req) == '0);

endmodule
