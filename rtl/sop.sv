// sop: Sum-of-Products unit of the Convolution Engine.
//
// Computes two dot products per advance, one for each of the two adjacent
// convolution windows a line buffer produces: y_a = sum(win_a[t]*w[t]),
// y_b = sum(win_b[t]*w[t]) over the 27 taps. The 27 taps serve either three
// 3x3 filters (three input features) or one 5x5 filter (taps 25 and 26 then
// carry zeros). Each dot product uses a multi-trellis cascade of 6 trellises
// (tap counts 5,5,5,4,4,4); the trellis outputs are aligned by extra
// registers and summed by an unregistered final adder, as in the published
// multi-trellis drawing. The 6-trellis split follows the published design;
// the per-trellis tap counts are this design's choice.
//
// Timing: a window presented while en is high appears on y_a/y_b after 6
// advances (LATENCY). Signed 16x16 products, 37-bit sums.
module sop
  import neuraghe_pkg::*;
(
  input  logic clk,
  input  logic en,
  input  win_t win_a,
  input  win_t win_b,
  input  win_t w,
  output acc_t y_a,
  output acc_t y_b
);
  localparam int unsigned N_TRELLIS = 6;
  localparam int unsigned LATENCY   = 6;
  // first tap and tap count of every trellis
  localparam int unsigned T_FIRST [N_TRELLIS] = '{0, 5, 10, 15, 19, 23};
  localparam int unsigned T_NUM   [N_TRELLIS] = '{5, 5, 5, 4, 4, 4};

  acc_t ta [N_TRELLIS];
  acc_t tb [N_TRELLIS];

  for (genvar g = 0; g < N_TRELLIS; g++) begin : g_tr
    localparam int unsigned F = T_FIRST[g];
    localparam int unsigned N = T_NUM[g];
    sop_trellis #(.NT(N), .EXTRA_DLY(LATENCY - 1 - N)) u_a (
      .clk, .en, .px(win_a[F +: N]), .w(w[F +: N]), .y(ta[g]));
    sop_trellis #(.NT(N), .EXTRA_DLY(LATENCY - 1 - N)) u_b (
      .clk, .en, .px(win_b[F +: N]), .w(w[F +: N]), .y(tb[g]));
  end

  always_comb begin
    y_a = '0;
    y_b = '0;
    for (int g = 0; g < N_TRELLIS; g++) begin
      y_a += ta[g];
      y_b += tb[g];
    end
  end

endmodule
