// relu: rectifier on a pair of output pixels.
//
// When act_en (the activation_en control) is set, negative pixels become
// zero; otherwise the pair passes unchanged. Purely combinational, placed
// between an Add-Shift and its pooling cascade as in the published CE
// organisation. Input and output words hold two signed 16-bit pixels.
module relu
  import neuraghe_pkg::*;
(
  input  logic              act_en,
  input  logic [WORD_W-1:0] din,
  output logic [WORD_W-1:0] dout
);
  always_comb begin
    for (int i = 0; i < 2; i++)
      dout[16*i +: 16] = (act_en && din[16*i+15]) ? 16'd0 : din[16*i +: 16];
  end
endmodule
