// weight_memory: private weight memory of the Convolution Engine.
//
// N_BANKS banks of DEPTH x 16-bit words. Weight index i (counted from the
// start of the memory) lives in bank i mod N_BANKS, row i / N_BANKS, so the
// weight loader can read N_BANKS consecutive weights per cycle. The write
// port is 64 bits wide (one beat of the weight DMA): write address A stores
// the four weights 4A..4A+3, i.e. bits 16k+15:16k go to bank (4A+k) mod
// N_BANKS of row 4A / N_BANKS. Reads have one cycle of latency.
//
// Published: a configurable number of BRAM banks read in parallel (32 are
// drawn) and loaded by the weight DMA. Depth and the write mapping are this
// design's choices.
module weight_memory
  import neuraghe_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic                                 clk,
  input  logic                                 wr_en,
  input  logic [$clog2(DEPTH*N_BANKS/4)-1:0]   wr_addr,
  input  logic [63:0]                          wr_data,
  input  logic [N_BANKS-1:0]                   rd_req,
  input  logic [N_BANKS-1:0][$clog2(DEPTH)-1:0] rd_addr,
  output logic [N_BANKS-1:0][PIX_W-1:0]        rd_data
);
  localparam int unsigned RW = $clog2(DEPTH);
  localparam int unsigned QB = $clog2(N_BANKS / 4);   // 64-bit slots per row

  logic [RW-1:0] wr_row;
  logic [QB-1:0] wr_quad;
  assign wr_row  = wr_addr[QB +: RW];
  assign wr_quad = wr_addr[QB-1:0];

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    logic [PIX_W-1:0] ram [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && (int'(wr_quad) == b / 4)) ram[wr_row] <= wr_data[16*(b%4) +: 16];
      if (rd_req[b]) rd_data[b] <= ram[rd_addr[b]];
    end
  end

endmodule
