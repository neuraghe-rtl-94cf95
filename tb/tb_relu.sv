// tb_relu: self-checking test of the ReLU block.
//
// Random pixel pairs, including the boundary values 0, -1, 32767 and -32768,
// with the activation enabled and disabled; each pixel of the output must be
// max(0, x) when enabled and x otherwise. The block is combinational: the
// result is checked one time step after the inputs change, and the clocked
// loop bounds the run time.
module tb_relu;
  import neuraghe_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic act_en = 1'b0;
  logic [WORD_W-1:0] din = '0, dout;
  relu dut (.act_en, .din, .dout);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] ref_px(input logic [15:0] x, input logic en_);
    return (en_ && x[15]) ? 16'd0 : x;
  endfunction

  initial begin
    logic [15:0] edge_v [4] = '{16'h0000, 16'hffff, 16'h7fff, 16'h8000};
    int cyc;
    cyc = 0;
    for (int i = 0; i < 1000; i++) begin
      @(posedge clk); cyc++;
      act_en = 1'($urandom);
      din = (i < 16) ? {edge_v[i % 4], edge_v[(i / 4) % 4]} : $urandom;
      #1;
      checks++;
      if (dout !== {ref_px(din[31:16], act_en), ref_px(din[15:0], act_en)}) begin
        failures++;
        if (failures < 10) $display("FAIL din %h en %0d: got %h", din, act_en, dout);
      end
    end
    checks++;
    if (cyc != 1000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
