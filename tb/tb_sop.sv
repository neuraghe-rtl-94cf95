// tb_sop: self-checking test of the Sum-of-Products unit.
//
// Random 27-tap windows (both windows of the pair) are presented with a
// random advance enable while the weights stay fixed, as during a CE job;
// the weights are changed twice between flushed runs. Every output pair is
// compared with the dot products computed here, exactly LATENCY = 6 advances
// after its window was presented; extreme values (all -32768 times -32768)
// check that the 37-bit sums do not overflow.
module tb_sop;
  import neuraghe_pkg::*;

  localparam int LAT = 6;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic en = 1'b0;
  win_t win_a, win_b, w;
  acc_t y_a, y_b;
  sop dut (.clk, .en, .win_a, .win_b, .w, .y_a, .y_b);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint dot(input win_t a, input win_t b);
    longint s;
    s = 0;
    for (int t = 0; t < TAPS; t++) s += longint'(signed'(a[t])) * longint'(signed'(b[t]));
    return s;
  endfunction

  longint ha [$], hb [$];
  int adv_n, cyc_first;

  task automatic run(input int n, input bit extreme);
    ha.delete(); hb.delete();
    adv_n = 0;
    for (int t = 0; t < TAPS; t++) w[t] = extreme ? 16'h8000 : 16'($urandom);
    for (int i = 0; i < n + LAT; i++) begin
      en = ($urandom_range(3) != 0) || i >= n;
      for (int t = 0; t < TAPS; t++) begin
        win_a[t] = extreme ? 16'h8000 : 16'($urandom);
        win_b[t] = extreme ? 16'h7fff : 16'($urandom);
      end
      if (en) begin ha.push_back(dot(win_a, w)); hb.push_back(dot(win_b, w)); end
      @(posedge clk); #1;
      if (en) begin
        adv_n++;
        // the window presented at advance k is on the outputs after advance k+LAT-1
        if (adv_n >= LAT) begin
          checks++;
          if (longint'(y_a) != ha[adv_n - LAT] || longint'(y_b) != hb[adv_n - LAT]) begin
            failures++;
            if (failures < 10) $display("FAIL adv %0d: got %0d %0d expected %0d %0d", adv_n,
                                        y_a, y_b, ha[adv_n - LAT], hb[adv_n - LAT]);
          end
        end
      end
    end
  endtask

  initial begin
    win_a = '0; win_b = '0; w = '0;
    repeat (2) @(posedge clk); #1;
    run(300, 1'b0);
    run(300, 1'b0);
    run(20, 1'b1);
    // the outputs must hold while en is low
    begin
      acc_t ya0;
      en = 1'b0; ya0 = y_a;
      for (int t = 0; t < TAPS; t++) win_a[t] = 16'($urandom);
      repeat (5) @(posedge clk);
      #1 checks++;
      if (y_a !== ya0) begin failures++; $display("FAIL output changed without en"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
