// tb_instr_mem: self-checking test of the instruction memory.
//
// The bus port writes random words with random byte enables while a shadow
// copy is kept here; bus reads and fetch-port reads at random addresses must
// return the shadow word exactly one cycle after the request. Both ports are
// also used in the same cycle.
module tb_instr_mem;
  localparam int WORDS = 256;
  localparam int AW = $clog2(WORDS);
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic i_req = 1'b0, d_req = 1'b0, d_we = 1'b0;
  logic [3:0] d_be = '0;
  logic [AW-1:0] i_addr = '0, d_addr = '0;
  logic [31:0] i_rdata, d_wdata = '0, d_rdata;
  instr_mem #(.WORDS(WORDS)) dut (.clk, .i_req, .i_addr, .i_rdata, .d_req, .d_we, .d_be, .d_addr,
                                  .d_wdata, .d_rdata);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] shadow [WORDS];

  initial begin
    for (int a = 0; a < WORDS; a++) begin
      d_req = 1'b1; d_we = 1'b1; d_be = 4'hf; d_addr = AW'(a); d_wdata = $urandom; shadow[a] = d_wdata;
      @(posedge clk); #1;
    end
    for (int i = 0; i < 2000; i++) begin
      int ia, da, kind;
      logic [31:0] ei, ed;
      ia = int'($urandom_range(WORDS - 1)); da = int'($urandom_range(WORDS - 1));
      kind = int'($urandom_range(2));
      i_req = 1'b1; i_addr = AW'(ia);
      d_req = (kind != 0); d_we = (kind == 2); d_be = 4'($urandom); d_addr = AW'(da); d_wdata = $urandom;
      ei = shadow[ia]; ed = shadow[da];
      if (d_req && d_we) for (int k = 0; k < 4; k++) if (d_be[k]) shadow[da][8*k +: 8] = d_wdata[8*k +: 8];
      @(posedge clk); #1;
      i_req = 1'b0; d_req = 1'b0; d_we = 1'b0;
      checks++;
      if (i_rdata !== ei && !(kind == 2 && ia == da)) begin
        failures++;
        if (failures < 10) $display("FAIL fetch %0d: %h expected %h", ia, i_rdata, ei);
      end
      if (kind == 1) begin
        checks++;
        if (d_rdata !== ed) begin
          failures++;
          if (failures < 10) $display("FAIL bus read %0d: %h expected %h", da, d_rdata, ed);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
