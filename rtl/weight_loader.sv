// weight_loader: weight loader state machine (WL) and weight register file.
//
// Before a CE job streams pixels, the WL copies the job's coefficients from
// the weight memory into registers that feed the SoP matrix directly. The
// coefficients of one job are N_COEF = 16*27 + 4 = 436 16-bit words stored
// from row `base` on: coefficient i (i = 27*sop + tap for the weights, 432 +
// o for the bias of output o) is in bank i mod 32, row base + i / 32. The WL
// reads all 32 banks in parallel, one row per cycle: 14 rows, done is pulsed
// 15 cycles after start. SoP numbering is row-major, sop = 4*output + line
// buffer.
//
// Published: a simple WL state machine, a register file per kernel, biases
// sent to the Add-Shift blocks, parallel access to the weight memory. The
// coefficient layout is this design's choice.
module weight_loader
  import neuraghe_pkg::*;
(
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   start,
  input  logic [WM_AW-1:0]                       base,
  output logic [N_BANKS-1:0]                     wm_req,
  output logic [N_BANKS-1:0][WM_AW-1:0]          wm_addr,
  input  logic [N_BANKS-1:0][PIX_W-1:0]          wm_rdata,
  output win_t [N_SOP-1:0]                       weights,
  output pix_t [N_OUT-1:0]                       biases,
  output logic                                   busy,
  output logic                                   done
);
  localparam int unsigned N_ROWS = (N_COEF + N_BANKS - 1) / N_BANKS;  // 14

  pix_t        coef_q [N_COEF];
  logic [4:0]  row_cnt;     // row being requested
  logic        rd_pend;     // data of row row_cnt-1 arrives this cycle

  always_comb begin
    for (int b = 0; b < N_BANKS; b++) begin
      wm_req[b]  = busy && (int'(row_cnt) < N_ROWS);
      wm_addr[b] = base + WM_AW'(row_cnt);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; row_cnt <= '0; rd_pend <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; row_cnt <= '0; rd_pend <= 1'b0;
      end else if (busy) begin
        rd_pend <= (int'(row_cnt) < N_ROWS);
        if (int'(row_cnt) < N_ROWS) row_cnt <= row_cnt + 5'd1;
        if (rd_pend && int'(row_cnt) == N_ROWS) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy && rd_pend) begin
      for (int b = 0; b < N_BANKS; b++)
        if ((int'(row_cnt) - 1) * N_BANKS + b < N_COEF)
          coef_q[(int'(row_cnt) - 1) * N_BANKS + b] <= pix_t'(wm_rdata[b]);
    end
  end

  always_comb begin
    for (int s = 0; s < N_SOP; s++)
      for (int t = 0; t < TAPS; t++) weights[s][t] = coef_q[s*TAPS + t];
    for (int o = 0; o < N_OUT; o++) biases[o] = coef_q[N_SOP*TAPS + o];
  end

endmodule
