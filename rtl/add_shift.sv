// add_shift: Adder-shifter at the end of one row of the SoP matrix.
//
// The four SoPs of a row compute the contributions of four line buffers to
// the same output feature. This block adds them, brings the wide sum back to
// 16 bits with an arithmetic right shift, and adds either the previous
// partial result read through a y_in port or the output feature's bias:
//   y[i] = sat16( (sum_c sop_i[c]) >>> shift + (use_yin ? y_in[i] : bias) )
// for the two pixels i = a (even column, bits 15:0) and b. The published
// description gives the summation, the shift to 16 bits and the accumulation
// with y_in or bias; the order of shift and addition, truncation and
// saturation are this design's choices.
//
// Timing: one register stage, updated when en is high; valid_o follows
// valid_i by one advance.
module add_shift
  import neuraghe_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                valid_i,
  input  acc_t [N_LB-1:0]     sop_a,
  input  acc_t [N_LB-1:0]     sop_b,
  input  logic [4:0]          shift,
  input  logic                use_yin,
  input  logic [WORD_W-1:0]   y_in,
  input  pix_t                bias,
  output logic                valid_o,
  output logic [WORD_W-1:0]   y
);
  logic signed [ACC_W+1:0] sum_a, sum_b;
  logic signed [47:0]      res_a, res_b;
  pix_t                    add_a, add_b;

  always_comb begin
    sum_a = '0;
    sum_b = '0;
    for (int c = 0; c < N_LB; c++) begin
      sum_a += (ACC_W+2)'(sop_a[c]);
      sum_b += (ACC_W+2)'(sop_b[c]);
    end
    add_a = use_yin ? pix_t'(y_in[15:0])  : bias;
    add_b = use_yin ? pix_t'(y_in[31:16]) : bias;
    res_a = 48'(sum_a >>> shift) + 48'(add_a);
    res_b = 48'(sum_b >>> shift) + 48'(add_b);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0;
      y       <= '0;
    end else if (en) begin
      valid_o <= valid_i;
      y       <= {sat16(res_b), sat16(res_a)};
    end
  end

endmodule
