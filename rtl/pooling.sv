// pooling: one 2x2 pooling stage on the CE output stream.
//
// Input: a stream of words, each holding two horizontally adjacent pixels
// (columns 2j and 2j+1 of one row), rows in order, `width` pixels per row.
// Each pair is first reduced horizontally; on even rows the result is kept in
// a row store (one entry per pair), on odd rows it is combined with the
// stored value into one pooled pixel. Two pooled pixels are packed into an
// output word, so the output is a stream of width/2 pixels per row and
// height/2 rows. Methods (method_sel): max, average (sum of four >>> 2) and
// downsampling (keeps the top-left pixel). When enable is low the stream
// passes unchanged through the output register. Two stages in cascade give
// 4x4 pooling.
//
// Published: 2x2 windows, max/average/downsampling, shift-register storage,
// cascade of two stages. This design's choices: the rounding of the average,
// width must be a multiple of 4, and the row store depth MAX_PAIRS.
//
// Timing: registered output; one output word per two input words of an odd
// row. start clears the position counters.
module pooling
  import neuraghe_pkg::*;
#(
  parameter int unsigned MAX_PAIRS = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              en,
  input  logic              enable,
  input  pool_method_e      method,
  input  logic [15:0]       width,
  input  logic              in_valid,
  input  logic [WORD_W-1:0] din,
  output logic              out_valid,
  output logic [WORD_W-1:0] dout
);
  localparam int unsigned PW = $clog2(MAX_PAIRS);

  logic signed [17:0] row_store [MAX_PAIRS];
  logic [PW-1:0]      pair_idx;
  logic               odd_row;
  logic               half_full;
  pix_t               held;
  logic signed [17:0] h, v_sum;
  pix_t               pooled;
  pix_t               pa, pb;
  logic [15:0]        last_pair;

  assign pa        = pix_t'(din[15:0]);
  assign pb        = pix_t'(din[31:16]);
  assign last_pair = (width >> 1) - 16'd1;

  always_comb begin
    unique case (method)
      POOL_MAX: h = 18'((pa > pb) ? pa : pb);
      POOL_AVG: h = 18'(pa) + 18'(pb);
      default:  h = 18'(pa);
    endcase
    v_sum = row_store[pair_idx] + h;
    unique case (method)
      POOL_MAX: pooled = (row_store[pair_idx] > h) ? pix_t'(row_store[pair_idx]) : pix_t'(h);
      POOL_AVG: pooled = pix_t'(v_sum >>> 2);
      default:  pooled = pix_t'(row_store[pair_idx]);
    endcase
  end

  always_ff @(posedge clk) begin
    if (en && enable && in_valid && !odd_row) row_store[pair_idx] <= h;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pair_idx <= '0; odd_row <= 1'b0; half_full <= 1'b0; held <= '0;
      out_valid <= 1'b0; dout <= '0;
    end else if (start) begin
      pair_idx <= '0; odd_row <= 1'b0; half_full <= 1'b0;
      out_valid <= 1'b0;
    end else if (en) begin
      if (!enable) begin
        out_valid <= in_valid;
        dout      <= din;
      end else begin
        out_valid <= 1'b0;
        if (in_valid) begin
          if (odd_row) begin
            if (half_full) begin
              out_valid <= 1'b1;
              dout      <= {pooled, held};
            end else begin
              held <= pooled;
            end
            half_full <= ~half_full;
          end
          if (16'(pair_idx) == last_pair) begin
            pair_idx <= '0;
            odd_row  <= ~odd_row;
          end else begin
            pair_idx <= pair_idx + 1'b1;
          end
        end
      end
    end
  end

endmodule
