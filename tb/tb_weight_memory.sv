// tb_weight_memory: self-checking test of the banked weight memory.
//
// Random 64-bit beats are written at random slots; a shadow array of 16-bit
// weights indexed by weight number (4 per slot) is kept here. Random reads
// of all 32 banks in parallel are then checked one cycle later against
// weight bank + 32*row. Reads are also issued in the cycle right after a
// write to the same row (read-after-write).
module tb_weight_memory;
  import neuraghe_pkg::*;

  localparam int DEPTH = 64;
  localparam int SW = $clog2(DEPTH * N_BANKS / 4);
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic wr_en = 1'b0;
  logic [SW-1:0] wr_addr = '0;
  logic [63:0] wr_data = '0;
  logic [N_BANKS-1:0] rd_req = '0;
  logic [N_BANKS-1:0][$clog2(DEPTH)-1:0] rd_addr = '0;
  logic [N_BANKS-1:0][PIX_W-1:0] rd_data;
  weight_memory #(.DEPTH(DEPTH)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_req, .rd_addr, .rd_data);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] shadow [DEPTH * N_BANKS];

  task automatic rd_check(input bit raw);
    logic [N_BANKS-1:0][$clog2(DEPTH)-1:0] a;
    for (int b = 0; b < N_BANKS; b++) a[b] = $clog2(DEPTH)'($urandom);
    rd_req = '1; rd_addr = a;
    @(posedge clk); #1;
    rd_req = '0;
    for (int b = 0; b < N_BANKS; b++) begin
      checks++;
      if (rd_data[b] !== shadow[b + N_BANKS * int'(a[b])]) begin
        failures++;
        if (failures < 10) $display("FAIL bank %0d row %0d: got %h expected %h (raw %0d)", b, a[b],
                                    rd_data[b], shadow[b + N_BANKS * int'(a[b])], raw);
      end
    end
  endtask

  initial begin
    // fill everything once, then random overwrites
    for (int s = 0; s < DEPTH * N_BANKS / 4; s++) begin
      wr_en = 1'b1; wr_addr = SW'(s); wr_data = {$urandom, $urandom};
      for (int k = 0; k < 4; k++) shadow[4*s + k] = wr_data[16*k +: 16];
      @(posedge clk); #1;
    end
    wr_en = 1'b0;
    for (int i = 0; i < 300; i++) begin
      if ($urandom_range(1)) begin
        int s;
        s = int'($urandom_range(DEPTH * N_BANKS / 4 - 1));
        wr_en = 1'b1; wr_addr = SW'(s); wr_data = {$urandom, $urandom};
        for (int k = 0; k < 4; k++) shadow[4*s + k] = wr_data[16*k +: 16];
        @(posedge clk); #1 wr_en = 1'b0;
        rd_check(1'b1);
      end else rd_check(1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
