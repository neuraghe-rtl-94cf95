// adma: activation DMA of the CSP.
//
// Moves a block of len_beats 64-bit beats between DDR, reached through a
// 64-bit AXI master (one high-performance port of the processing system),
// and the TCDM, reached as one 32-bit master of the logarithmic interconnect.
//   dir = 0 (load, "rx"): one AXI read burst; every beat is written to the
//                         TCDM as two words, low half first, at tcdm_addr,
//                         tcdm_addr+1, ...
//   dir = 1 (store, "tx"): two TCDM reads per beat, then one AXI write beat;
//                         one write burst, completed by the write response.
// Bursts are INCR, 8 bytes per beat, at most 256 beats (AXI4 limits); no IDs,
// no error handling. One beat is in flight at a time. start is taken in
// IDLE; done pulses for one cycle at the end.
//
// Published: a DMA that moves activations in and out of the CSP over a
// 64-bit HP port, with load and store directions. The AXI subset, the
// TCDM addressing and the one-beat buffering are this design's choices.
module adma
  import neuraghe_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               dir,
  input  logic [31:0]        ext_addr,
  input  logic [TCDM_AW-1:0] tcdm_addr,
  input  logic [8:0]         len_beats,
  output logic               busy,
  output logic               done,
  // AXI read
  output logic               ar_valid,
  input  logic               ar_ready,
  output logic [31:0]        ar_addr,
  output logic [7:0]         ar_len,
  input  logic               r_valid,
  output logic               r_ready,
  input  logic [63:0]        r_data,
  input  logic               r_last,
  // AXI write
  output logic               aw_valid,
  input  logic               aw_ready,
  output logic [31:0]        aw_addr,
  output logic [7:0]         aw_len,
  output logic               w_valid,
  input  logic               w_ready,
  output logic [63:0]        w_data,
  output logic               w_last,
  input  logic               b_valid,
  output logic               b_ready,
  // TCDM master (logarithmic interconnect)
  output logic               t_req,
  output logic               t_we,
  output logic [3:0]         t_be,
  output logic [TCDM_AW-1:0] t_addr,
  output logic [WORD_W-1:0]  t_wdata,
  input  logic               t_gnt,
  input  logic               t_rvalid,
  input  logic [WORD_W-1:0]  t_rdata
);
  typedef enum logic [3:0] {
    IDLE, L_AR, L_R, L_WLO, L_WHI, S_AW, S_RLO, S_RHI, S_W, S_B
  } state_e;

  state_e             state;
  logic [63:0]        beat;
  logic [TCDM_AW-1:0] taddr;
  logic [8:0]         left;      // beats still to move
  logic               rd_wait;   // a TCDM read was granted, data pending
  logic               is_last;

  assign busy     = (state != IDLE);
  assign ar_valid = (state == L_AR);
  assign ar_addr  = ext_addr;
  assign ar_len   = 8'(len_beats - 9'd1);
  assign r_ready  = (state == L_R);
  assign aw_valid = (state == S_AW);
  assign aw_addr  = ext_addr;
  assign aw_len   = 8'(len_beats - 9'd1);
  assign w_valid  = (state == S_W);
  assign w_data   = beat;
  assign w_last   = (left == 9'd1);
  assign b_ready  = (state == S_B);
  assign is_last  = (left == 9'd1);

  always_comb begin
    t_req   = 1'b0;
    t_we    = 1'b0;
    t_be    = 4'hf;
    t_addr  = taddr;
    t_wdata = '0;
    unique case (state)
      L_WLO: begin t_req = 1'b1; t_we = 1'b1; t_wdata = beat[31:0];  end
      L_WHI: begin t_req = 1'b1; t_we = 1'b1; t_wdata = beat[63:32]; end
      S_RLO, S_RHI: t_req = !rd_wait;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; beat <= '0; taddr <= '0; left <= '0; rd_wait <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          taddr <= tcdm_addr;
          left  <= len_beats;
          state <= dir ? S_AW : L_AR;
        end
        L_AR:  if (ar_ready) state <= L_R;
        L_R:   if (r_valid) begin beat <= r_data; state <= L_WLO; end
        L_WLO: if (t_gnt) begin taddr <= taddr + 1'b1; state <= L_WHI; end
        L_WHI: if (t_gnt) begin
          taddr <= taddr + 1'b1;
          left  <= left - 9'd1;
          if (is_last) begin state <= IDLE; done <= 1'b1; end
          else state <= L_R;
        end
        S_AW:  if (aw_ready) state <= S_RLO;
        S_RLO: begin
          if (t_gnt) begin rd_wait <= 1'b1; taddr <= taddr + 1'b1; end
          if (t_rvalid && rd_wait) begin beat[31:0] <= t_rdata; rd_wait <= 1'b0; state <= S_RHI; end
        end
        S_RHI: begin
          if (t_gnt) begin rd_wait <= 1'b1; taddr <= taddr + 1'b1; end
          if (t_rvalid && rd_wait) begin beat[63:32] <= t_rdata; rd_wait <= 1'b0; state <= S_W; end
        end
        S_W:   if (w_ready) begin
          left <= left - 9'd1;
          state <= is_last ? S_B : S_RLO;
        end
        S_B:   if (b_valid) begin state <= IDLE; done <= 1'b1; end
        default: state <= IDLE;
      endcase
    end
  end

  // an AXI read beat marked last must be the final one of the burst
  a_rlast: assert property (@(posedge clk) disable iff (!rst_n)
                            (state == L_R && r_valid && r_last) |-> is_last);

endmodule
