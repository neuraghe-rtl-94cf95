// tb_weight_loader: self-checking test of the weight loader and its register
// file.
//
// A behavioural weight memory (32 banks, one cycle read latency) is filled
// with random coefficients at a random base row. After start, done must
// pulse exactly 15 cycles later (14 rows read in parallel plus the read
// latency), busy must be high in between, and every weight of the 16 SoPs
// and every bias must equal coefficient 27*sop + tap and 432 + o of the job.
// Three jobs at different bases are run back to back.
module tb_weight_loader;
  import neuraghe_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  logic [WM_AW-1:0] base = '0;
  logic [N_BANKS-1:0] wm_req;
  logic [N_BANKS-1:0][WM_AW-1:0] wm_addr;
  logic [N_BANKS-1:0][PIX_W-1:0] wm_rdata;
  win_t [N_SOP-1:0] weights;
  pix_t [N_OUT-1:0] biases;
  weight_loader dut (.clk, .rst_n, .start, .base, .wm_req, .wm_addr, .wm_rdata, .weights, .biases,
                     .busy, .done);

  // behavioural weight memory
  logic [15:0] mem [N_BANKS][512];
  always @(posedge clk)
    for (int b = 0; b < N_BANKS; b++) if (wm_req[b]) wm_rdata[b] <= mem[b][wm_addr[b]];

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic job(input int b0);
    logic [15:0] coef [N_COEF];
    int cyc;
    for (int i = 0; i < N_COEF; i++) begin
      coef[i] = 16'($urandom);
      mem[i % N_BANKS][b0 + i / N_BANKS] = coef[i];
    end
    base = WM_AW'(b0);
    @(posedge clk); #1 start = 1'b1;
    @(posedge clk); #1 start = 1'b0;
    cyc = 0;             // cycles since the edge that took start
    while (!done && cyc < 100) begin
      checks++;
      if (!busy) begin failures++; $display("FAIL busy low during load"); end
      @(posedge clk); #1 cyc++;
    end
    checks++;
    if (cyc != 15) begin failures++; $display("FAIL done after %0d cycles, expected 15", cyc); end
    for (int s = 0; s < N_SOP; s++) for (int t = 0; t < TAPS; t++) begin
      checks++;
      if (weights[s][t] !== coef[27*s + t]) begin
        failures++;
        if (failures < 10) $display("FAIL weight %0d/%0d: %h expected %h", s, t, weights[s][t], coef[27*s+t]);
      end
    end
    for (int o = 0; o < N_OUT; o++) begin
      checks++;
      if (biases[o] !== coef[432 + o]) begin failures++; $display("FAIL bias %0d", o); end
    end
    @(posedge clk); #1;
    checks++;
    if (busy || done) begin failures++; $display("FAIL not idle after done"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    job(0);
    job(3);
    job(512 - 14);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
