// neuraghe_pkg: types and constants shared by the Convolution-Specific
// Processor (CSP) blocks.
//
// Pixels, weights and biases are 16-bit signed fixed point (Q5.11 in the
// networks the engine targets). A TCDM word is 32 bits and carries two
// horizontally adjacent pixels: the even (left) pixel in bits 15:0 and the
// odd (right) pixel in bits 31:16. The Convolution Engine (CE) has 4 line
// buffers, a 4x4 matrix of sum-of-products (SoP) units and 4 output
// channels; every SoP has 27 multipliers per output pixel. These numbers
// follow the published configuration. The job descriptor (ce_cfg_t) and its
// field encoding are this design's own choice.
package neuraghe_pkg;

  localparam int unsigned PIX_W     = 16;   // pixel / weight width
  localparam int unsigned WORD_W    = 32;   // TCDM word width (2 pixels)
  localparam int unsigned TAPS      = 27;   // multipliers per window
  localparam int unsigned ACC_W     = 37;   // 32 + log2(32) accumulator
  localparam int unsigned N_LB      = 4;    // line buffers (CE columns)
  localparam int unsigned N_OUT     = 4;    // output channels (CE rows)
  localparam int unsigned N_SOP     = N_LB * N_OUT;
  localparam int unsigned N_XIN     = 12;   // x_in ports
  localparam int unsigned N_CE_PORT = N_XIN + 2 * N_OUT; // 12 x_in + 4 y_in + 4 y_out
  localparam int unsigned N_COEF    = N_SOP * TAPS + N_OUT; // weights + biases = 436
  localparam int unsigned N_BANKS   = 32;   // TCDM and weight memory banks
  localparam int unsigned TCDM_AW   = 15;   // TCDM word address (32 banks x 1024 words)
  localparam int unsigned WM_AW     = 9;    // weight memory row address (512 rows)

  typedef logic signed [PIX_W-1:0] pix_t;
  typedef pix_t [TAPS-1:0]          win_t;   // one convolution window
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [TCDM_AW-1:0]       taddr_t;

  typedef enum logic [1:0] {
    POOL_MAX = 2'd0,
    POOL_AVG = 2'd1,
    POOL_DWN = 2'd2   // downsampling: keep the top-left pixel
  } pool_method_e;

  // Descriptor of one CE job: up to 12 input features (3x3) or 4 (5x5)
  // convolved into 4 output features.
  typedef struct packed {
    logic                           fs5;        // 1: 5x5 filters, 0: 3x3 filters
    logic                           zp_en;      // zero padding (same-size output)
    logic [15:0]                    width;      // input row width in pixels (even)
    logic [15:0]                    height;     // input rows
    logic [N_XIN-1:0]               x_en;       // active x_in ports
    logic [N_OUT-1:0]               y_en;       // active outputs
    logic                           use_yin;    // accumulate on y_in instead of bias
    logic [4:0]                     shift;      // right shift of the SoP sum
    logic                           relu_en;    // activation_en
    logic [1:0]                     pool_en;    // stage 0 / stage 1 of the pooling cascade
    pool_method_e                   pool_method;// method_sel
    logic [WM_AW-1:0]               wm_base;    // weight memory row of the job's coefficients
    logic [N_XIN-1:0][TCDM_AW-1:0]  x_base;     // word address of each input feature
    logic [N_OUT-1:0][TCDM_AW-1:0]  yin_base;   // word address of each partial-sum input
    logic [N_OUT-1:0][TCDM_AW-1:0]  yout_base;  // word address of each output feature
  } ce_cfg_t;

  function automatic pix_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return pix_t'(v);
  endfunction

endpackage
