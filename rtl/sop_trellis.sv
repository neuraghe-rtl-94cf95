// sop_trellis: one multiply-add trellis of a sum-of-products unit.
//
// Tap k delays its pixel and weight by k registers, multiplies them, registers
// the product and adds it to the running sum coming from tap k-1; the sum is
// registered again. This is the DSP48-friendly cascade of the single-trellis
// drawing (input registers keep the critical path independent of the number
// of taps). Tap 0 adds to zero. The result of the inputs presented at one
// advance appears EXTRA_DLY + NT + 1 advances later; EXTRA_DLY output
// registers align a shorter trellis with a longer one.
//
// Every register advances only when en is high, so the CE can stall the whole
// pipeline on a memory conflict (a choice of this design).
module sop_trellis
  import neuraghe_pkg::*;
#(
  parameter int unsigned NT        = 5,
  parameter int unsigned EXTRA_DLY = 0
) (
  input  logic            clk,
  input  logic            en,
  input  pix_t [NT-1:0]   px,
  input  pix_t [NT-1:0]   w,
  output acc_t            y
);

  logic signed [2*PIX_W-1:0] prod_q [NT];
  acc_t                      acc_q  [NT];

  for (genvar k = 0; k < NT; k++) begin : g_tap
    pix_t px_k, w_k;
    if (k == 0) begin : g_nodly
      assign px_k = px[0];
      assign w_k  = w[0];
    end else begin : g_dly
      pix_t dpx [k];
      pix_t dw  [k];
      always_ff @(posedge clk) begin
        if (en) begin
          dpx[0] <= px[k];
          dw[0]  <= w[k];
          for (int j = 1; j < k; j++) begin
            dpx[j] <= dpx[j-1];
            dw[j]  <= dw[j-1];
          end
        end
      end
      assign px_k = dpx[k-1];
      assign w_k  = dw[k-1];
    end

    always_ff @(posedge clk) begin
      if (en) begin
        prod_q[k] <= px_k * w_k;
        if (k == 0) acc_q[k] <= acc_t'(prod_q[k]);
        else        acc_q[k] <= acc_q[k-1] + acc_t'(prod_q[k]);
      end
    end
  end

  if (EXTRA_DLY == 0) begin : g_out
    assign y = acc_q[NT-1];
  end else begin : g_out_dly
    acc_t oq [EXTRA_DLY];
    always_ff @(posedge clk) begin
      if (en) begin
        oq[0] <= acc_q[NT-1];
        for (int j = 1; j < EXTRA_DLY; j++) oq[j] <= oq[j-1];
      end
    end
    assign y = oq[EXTRA_DLY-1];
  end

endmodule
