// wdma: weight DMA of the CSP.
//
// Reads len_beats 64-bit beats from DDR with one AXI read burst (one
// high-performance port) and writes them into the weight memory, beat k at
// 64-bit slot wm_addr + k (four 16-bit weights per slot). The weight memory
// write port always accepts, so r_ready is held high during the burst.
// start is taken when idle; done pulses for one cycle after the last beat.
// Runs on the high-speed clock, like the weight memory.
//
// Published: a DMA moving weights into the private weight memory over a
// 64-bit port, receive direction only. The AXI subset (INCR, at most 256
// beats, no IDs) is this design's choice.
module wdma #(
  parameter int unsigned WM_SLOT_W = 12
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [31:0]          ext_addr,
  input  logic [WM_SLOT_W-1:0] wm_addr,
  input  logic [8:0]           len_beats,
  output logic                 busy,
  output logic                 done,
  output logic                 ar_valid,
  input  logic                 ar_ready,
  output logic [31:0]          ar_addr,
  output logic [7:0]           ar_len,
  input  logic                 r_valid,
  output logic                 r_ready,
  input  logic [63:0]          r_data,
  input  logic                 r_last,
  output logic                 wm_wr_en,
  output logic [WM_SLOT_W-1:0] wm_wr_addr,
  output logic [63:0]          wm_wr_data
);
  typedef enum logic [1:0] {IDLE, AR, DATA} state_e;
  state_e               state;
  logic [WM_SLOT_W-1:0] slot;
  logic [8:0]           left;

  assign busy       = (state != IDLE);
  assign ar_valid   = (state == AR);
  assign ar_addr    = ext_addr;
  assign ar_len     = 8'(len_beats - 9'd1);
  assign r_ready    = (state == DATA);
  assign wm_wr_en   = (state == DATA) && r_valid;
  assign wm_wr_addr = slot;
  assign wm_wr_data = r_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; slot <= '0; left <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin slot <= wm_addr; left <= len_beats; state <= AR; end
        AR:   if (ar_ready) state <= DATA;
        DATA: if (r_valid) begin
          slot <= slot + 1'b1;
          left <= left - 9'd1;
          if (left == 9'd1) begin state <= IDLE; done <= 1'b1; end
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_rlast: assert property (@(posedge clk) disable iff (!rst_n)
                            (state == DATA && r_valid && r_last) |-> (left == 9'd1));

endmodule
