// instr_mem: instruction memory (L2 block RAM) of the micro-controller.
//
// WORDS x 32-bit single-clock RAM with two ports: a read-only fetch port for
// the soft core and a read/write port on the CSP bus, through which the host
// loads the resident runtime at boot. Both ports use word addresses and
// answer one cycle after the request (rdata registered); the bus port has
// byte enables. Published: an instruction memory on the host memory map,
// loaded at boot. Its size is this design's choice.
module instr_mem #(
  parameter int unsigned WORDS = 8192
) (
  input  logic                     clk,
  input  logic                     i_req,
  input  logic [$clog2(WORDS)-1:0] i_addr,
  output logic [31:0]              i_rdata,
  input  logic                     d_req,
  input  logic                     d_we,
  input  logic [3:0]               d_be,
  input  logic [$clog2(WORDS)-1:0] d_addr,
  input  logic [31:0]              d_wdata,
  output logic [31:0]              d_rdata
);
  logic [31:0] ram [WORDS];

  always_ff @(posedge clk) begin
    if (i_req) i_rdata <= ram[i_addr];
    if (d_req) begin
      if (d_we) begin
        for (int k = 0; k < 4; k++)
          if (d_be[k]) ram[d_addr][8*k +: 8] <= d_wdata[8*k +: 8];
      end else begin
        d_rdata <= ram[d_addr];
      end
    end
  end
endmodule
