// line_buffer: reconfigurable line buffer of the Convolution Engine.
//
// Nine lines of pixel slots form one long shift register. Every enabled
// advance shifts one 32-bit word (two pixels) into line 0; the word leaving
// the end of a line (the tap at W/2 words, W = row width) enters the next
// line, so line l holds the image row l rows above the newest one. Two
// multiplexers reconfigure the shift path, as in the published drawing:
//   fs5 = 1 (5x5): line 3 is fed from line 2, line 6 from zero; lines 0..4
//                  carry one stream (din[0]).
//   fs5 = 0 (3x3): line 3 is fed from din[1], line 6 from din[2]; lines 0-2,
//                  3-5 and 6-8 carry three independent streams.
// Lines 5 and 8 only need the window slots, so they are 3 words long. The
// rewiring stage reads the first slots of the lines and forms two windows
// centred on horizontally adjacent pixels (win_a left, win_b right):
//   5x5: tap 5*r + c (r window row from the top, c column from the left),
//        taps 25 and 26 are zero;
//   3x3: tap 9*s + 3*r + c for stream s.
// Row and column counters locate the windows in the image; with zero padding
// enabled, window pixels outside the H x W image are forced to zero (this is
// the "ZP mask"). win_valid marks window pairs whose centres are a pair of
// output pixels (even output column first), win_row/win_col give the output
// position of win_a.
//
// Published: 9 lines, the two muxes, the two modes, 128-word lines, two
// windows per cycle, zero padding in the rewiring. This design's choices: all
// slots are registers (no register/SRL split), the counter-based mask, and in
// 3x3 mode with padding the windows use slots 1..4 instead of 0..3 so that
// output pixel pairs stay word aligned. Stride is 1.
//
// Timing: windows are combinational from the slot registers; after an advance
// the new windows are visible in the same cycle. W must be even and at most
// 2*LINE_WORDS.
module line_buffer
  import neuraghe_pkg::*;
#(
  parameter int unsigned LINE_WORDS = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,     // clears the position counters
  input  logic        en,        // shift one word into every stream
  input  logic        fs5,
  input  logic        zp_en,
  input  logic [15:0] width,     // pixels
  input  logic [15:0] height,    // rows
  input  logic [2:0][WORD_W-1:0] din,
  output win_t        win_a,
  output win_t        win_b,
  output logic        win_valid,
  output logic [15:0] win_row,
  output logic [15:0] win_col
);
  localparam int unsigned N_LINES     = 9;
  localparam int unsigned SHORT_WORDS = 3;

  logic [WORD_W-1:0] mem [N_LINES][LINE_WORDS];
  logic [WORD_W-1:0] line_in [N_LINES];
  logic [15:0]       tap;          // index of a line's last word
  logic [15:0]       cur_row, cur_cw;   // position of the newest word
  logic [15:0]       nxt_row, nxt_cw;   // position of the next word

  localparam int unsigned TAP_W = $clog2(LINE_WORDS);
  logic [TAP_W-1:0] tap_i;
  assign tap   = (width >> 1) - 16'd1;
  assign tap_i = tap[TAP_W-1:0];

  always_comb begin
    for (int l = 0; l < N_LINES; l++) line_in[l] = mem[(l == 0) ? 0 : l-1][tap_i];
    line_in[0] = din[0];
    line_in[3] = fs5 ? mem[2][tap_i] : din[1];
    line_in[6] = fs5 ? '0 : din[2];
  end

  always_ff @(posedge clk) begin
    if (en) begin
      for (int l = 0; l < N_LINES; l++) begin
        mem[l][0] <= line_in[l];
        for (int j = 1; j < LINE_WORDS; j++)
          if (!(l == 5 || l == 8) || j < SHORT_WORDS) mem[l][j] <= mem[l][j-1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nxt_row <= '0; nxt_cw <= '0; cur_row <= '0; cur_cw <= '0;
    end else if (start) begin
      nxt_row <= '0; nxt_cw <= '0; cur_row <= '0; cur_cw <= '0;
    end else if (en) begin
      cur_row <= nxt_row;
      cur_cw  <= nxt_cw;
      if (nxt_cw == tap) begin
        nxt_cw  <= '0;
        nxt_row <= nxt_row + 16'd1;
      end else begin
        nxt_cw <= nxt_cw + 16'd1;
      end
    end
  end

  // pixel in slot s of line l (slot 0 = newest pixel)
  function automatic pix_t slot(input int l, input int s);
    logic [WORD_W-1:0] wd;
    wd = mem[l][s/2];
    return (s % 2 == 0) ? pix_t'(wd[31:16]) : pix_t'(wd[15:0]);
  endfunction

  // window geometry and masks
  always_comb begin
    int p, off, p0, wi, hi, wout, hout;
    int rb, cb, ra, ca, orow, ocol;
    logic [15:0] row_msk_a, row_msk_b, col_msk_a, col_msk_b; // bit d: row/col offset d inside image
    p    = fs5 ? 2 : 1;
    off  = (!fs5 && zp_en) ? 1 : 0;
    p0   = zp_en ? 0 : p;
    wi   = int'(width);
    hi   = int'(height);
    wout = wi - 2 * p0;
    hout = hi - 2 * p0;
    // centre of window b: newest pixel is column 2*cur_cw+1 of row cur_row
    cb = 2 * int'(cur_cw) + 1 - off - p;
    rb = int'(cur_row) - p;
    if (cb < 0) begin cb += wi; rb -= 1; end
    ca = cb - 1;
    ra = rb;
    if (ca < 0) begin ca += wi; ra -= 1; end
    orow = ra - p0;
    ocol = ca - p0;
    win_valid = (ra == rb) && (orow >= 0) && (orow < hout) && (ocol >= 0) &&
                (ocol + 1 < wout) && (ocol % 2 == 0);
    win_row = 16'(orow);
    win_col = 16'(ocol);
    for (int d = 0; d < 16; d++) begin
      row_msk_a[d] = (ra - p + d >= 0) && (ra - p + d < hi);
      row_msk_b[d] = (rb - p + d >= 0) && (rb - p + d < hi);
      col_msk_a[d] = (ca - p + d >= 0) && (ca - p + d < wi);
      col_msk_b[d] = (cb - p + d >= 0) && (cb - p + d < wi);
    end
    if (!zp_en) begin
      row_msk_a = '1; row_msk_b = '1; col_msk_a = '1; col_msk_b = '1;
    end
    win_a = '0;
    win_b = '0;
    if (fs5) begin
      for (int r = 0; r < 5; r++)
        for (int c = 0; c < 5; c++) begin
          // window row r (top = oldest) lives in line 4-r; column c in slot 4-c (+1 for a)
          if (row_msk_a[r] && col_msk_a[c]) win_a[5*r+c] = slot(4 - r, 4 - c + 1);
          if (row_msk_b[r] && col_msk_b[c]) win_b[5*r+c] = slot(4 - r, 4 - c);
        end
    end else begin
      for (int s = 0; s < 3; s++)
        for (int r = 0; r < 3; r++)
          for (int c = 0; c < 3; c++) begin
            if (row_msk_a[r] && col_msk_a[c]) win_a[9*s+3*r+c] = slot(3*s + 2 - r, off + 2 - c + 1);
            if (row_msk_b[r] && col_msk_b[c]) win_b[9*s+3*r+c] = slot(3*s + 2 - r, off + 2 - c);
          end
    end
  end

endmodule
