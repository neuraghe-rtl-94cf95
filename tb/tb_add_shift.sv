// tb_add_shift: self-checking test of the Add-Shift block.
//
// Random SoP sums (full 37-bit range and small values), shifts 0..31, bias or
// partial-sum mode, random advance enable. After every advance the output
// pair is compared with the formula sat16((sum of the four SoPs) >>> shift +
// (y_in or bias)) computed here, and valid_o must equal the valid_i of the
// advance (one register stage). Without en the output must hold.
module tb_add_shift;
  import neuraghe_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic en = 1'b0, valid_i = 1'b0, use_yin = 1'b0, valid_o;
  acc_t [N_LB-1:0] sop_a, sop_b;
  logic [4:0] shift = '0;
  logic [WORD_W-1:0] y_in = '0, y;
  pix_t bias = '0;
  add_shift dut (.clk, .rst_n, .en, .valid_i, .sop_a, .sop_b, .shift, .use_yin, .y_in, .bias,
                 .valid_o, .y);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_pix(input acc_t [N_LB-1:0] s, input int sh, input int add);
    longint sum, r;
    sum = 0;
    for (int c = 0; c < N_LB; c++) sum += longint'(s[c]);
    r = (sum >>> sh) + longint'(add);
    if (r > 32767) return 32767;
    if (r < -32768) return -32768;
    return int'(r);
  endfunction

  initial begin
    logic [WORD_W-1:0] exp_y, y0;
    logic exp_v;
    int n_sat = 0;
    sop_a = '0; sop_b = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    exp_y = '0; exp_v = 1'b0;
    for (int i = 0; i < 2000; i++) begin
      bit big;
      big = (i % 3 == 0);
      for (int c = 0; c < N_LB; c++) begin
        sop_a[c] = big ? ACC_W'({$urandom, $urandom}) : ACC_W'(int'($urandom_range(2000000)) - 1000000);
        sop_b[c] = big ? ACC_W'({$urandom, $urandom}) : ACC_W'(int'($urandom_range(2000000)) - 1000000);
      end
      shift = 5'($urandom); use_yin = 1'($urandom); y_in = $urandom; bias = 16'($urandom);
      valid_i = 1'($urandom); en = ($urandom_range(3) != 0);
      y0 = y;
      if (en) begin
        exp_y = {16'(ref_pix(sop_b, shift, use_yin ? int'(signed'(y_in[31:16])) : int'(bias))),
                 16'(ref_pix(sop_a, shift, use_yin ? int'(signed'(y_in[15:0]))  : int'(bias)))};
        exp_v = valid_i;
        if (exp_y[15:0] == 16'h7fff || exp_y[15:0] == 16'h8000) n_sat++;
      end
      @(posedge clk); #1;
      checks++;
      if (en ? (y !== exp_y || valid_o !== exp_v) : (y !== y0)) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d en=%0d: got %h/%0d expected %h/%0d", i, en, y, valid_o, exp_y, exp_v);
      end
    end
    // saturation must have been exercised
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL no saturated result seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
