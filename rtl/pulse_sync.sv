// pulse_sync: carries a one-cycle pulse from one clock domain to another.
//
// The source pulse toggles a flag; the flag crosses through two flip-flops of
// the destination clock and every change of it gives one destination-cycle
// pulse. Pulses must be at least three destination cycles apart. Used for
// the start and done events between the CSP's low-speed and high-speed
// domains (a design choice; the published design only names the domains).
module pulse_sync (
  input  logic clk_src,
  input  logic rst_src_n,
  input  logic pulse_src,
  input  logic clk_dst,
  input  logic rst_dst_n,
  output logic pulse_dst
);
  logic tog_src;
  logic [2:0] sync_dst;

  always_ff @(posedge clk_src or negedge rst_src_n)
    if (!rst_src_n)     tog_src <= 1'b0;
    else if (pulse_src) tog_src <= ~tog_src;

  always_ff @(posedge clk_dst or negedge rst_dst_n)
    if (!rst_dst_n) sync_dst <= '0;
    else            sync_dst <= {sync_dst[1:0], tog_src};

  assign pulse_dst = sync_dst[2] ^ sync_dst[1];
endmodule
