// accel_pkg: types and constants shared by the accelerator.
//
// Number formats: feature maps are 16-bit signed fixed point, weights 16-bit
// signed, partial sums 32-bit signed. 2-D DCT coefficients are 20-bit signed.
// Quantised coefficients are m = 8-bit signed integers; the paper leaves m
// open and this value is a design choice.
//
// The 8-point DCT constants a..g follow the naming of the paper's Ce/Co
// matrices: a = cos(pi/4)/2, b..e = cos(k*pi/16)/2 for k = 1,3,5,7,
// f = cos(pi/8)/2, g = cos(3*pi/8)/2 (orthonormal DCT-II), rounded to
// COEF_FRAC = 14 fractional bits.
//
// The Q-table is the JPEG luminance table. The 2-bit quantisation level
// register selects one of four scaled copies: level L uses
// max(1, JPEG * 2^L / 8), i.e. 1/8, 1/4, 1/2 and 1 times the JPEG table.
// The paper fixes four levels and the JPEG origin; the scale factors are
// this design's choice.
package accel_pkg;

  localparam int DATA_W  = 16;   // feature map / weight width
  localparam int PSUM_W  = 32;   // partial sum width
  localparam int Z_W     = 20;   // DCT coefficient width
  localparam int QM      = 8;    // quantised value width (signed)
  localparam int COEF_FRAC = 14; // fractional bits of the CCM constants
  localparam int NCH     = 4;    // channels processed in parallel
  localparam int NROW    = 8;    // rows in a row frame / block size

  localparam logic signed [15:0] CA = 16'sd5793;
  localparam logic signed [15:0] CB = 16'sd8035;
  localparam logic signed [15:0] CC = 16'sd6811;
  localparam logic signed [15:0] CD = 16'sd4551;
  localparam logic signed [15:0] CE = 16'sd1598;
  localparam logic signed [15:0] CF = 16'sd7568;
  localparam logic signed [15:0] CG = 16'sd3135;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [PSUM_W-1:0] psum_t;
  typedef logic signed [Z_W-1:0]    coef_t;
  typedef logic signed [QM-1:0]     qval_t;

  // Point-wise operations of the non-linear module.
  typedef enum logic [1:0] {PW_NONE = 2'd0, PW_BN = 2'd1, PW_ACT = 2'd2} pw_op_e;
  // Activation functions.
  typedef enum logic [1:0] {ACT_RELU = 2'd0, ACT_LEAKY = 2'd1, ACT_PRELU = 2'd2, ACT_NONE = 2'd3} act_e;

  typedef struct packed {
    pw_op_e     pre_op0;     // first op before pooling
    pw_op_e     pre_op1;     // second op before pooling
    pw_op_e     post_op0;    // first op after pooling
    pw_op_e     post_op1;    // second op after pooling
    logic       pool_en;     // 2x2 stride-2 pooling on
    logic       pool_avg;    // 1: average, 0: max
    act_e       act;         // activation function
    logic [2:0] leaky_shift; // leaky ReLU slope 2^-leaky_shift
    logic [3:0] bn_shift;    // BN: y = (x*gamma) >>> bn_shift + beta
  } nl_cfg_t;

  // Per-output-channel parameters delivered with the weights.
  typedef struct packed {
    logic signed [15:0] gamma;
    logic signed [15:0] beta;
    logic signed [15:0] alpha;  // PReLU slope, 8 fractional bits
  } bn_par_t;

  // Layer configuration (set through the configuration registers).
  typedef struct packed {
    logic [5:0]  w_blk;      // input width in 8-column blocks
    logic [5:0]  h_rf;       // input height in 8-row frames
    logic [5:0]  cin_grp;    // input channels / 4
    logic [5:0]  cout_grp;   // output channels / 4
    logic [1:0]  q_level_in; // Q-table level used to decompress the input
    logic [1:0]  q_level_out;// Q-table level used to compress the output
    logic [15:0] dq_mult;    // inverse scale (Fmax-Fmin)/imax, fixed point
    logic [4:0]  dq_shift;
    logic [15:0] q_mult;     // scale imax/(Fmax-Fmin), fixed point
    logic [4:0]  q_shift;
    logic [4:0]  psum_shift; // partial sum -> 16-bit feature
    nl_cfg_t     nl;
  } layer_cfg_t;

  // Tag that travels with a PE array input to the scratch pad.
  typedef struct packed {
    logic [1:0] f;        // filter lane within the output group
    logic [5:0] rf;       // row frame of the input column
    logic [8:0] col;      // output column (input column - 2)
    logic       first;    // first input channel group: write, do not add
    logic       main_ok;  // rows 0..5 and PSUM'' valid
    logic       prev_ok;  // PSUM' valid (a previous frame exists)
  } pe_tag_t;

  localparam int JPEG_Q [64] = '{
    16, 11, 10, 16, 24, 40, 51, 61,
    12, 12, 14, 19, 26, 58, 60, 55,
    14, 13, 16, 24, 40, 57, 69, 56,
    14, 17, 22, 29, 51, 87, 80, 62,
    18, 22, 37, 56, 68,109,103, 77,
    24, 35, 55, 64, 81,104,113, 92,
    49, 64, 78, 87,103,121,120,101,
    72, 92, 95, 98,112,100,103, 99};

  // Q-table entry for frequency row u, column v at a given level.
  function automatic logic [7:0] qt_value(input logic [1:0] level, input logic [2:0] u,
                                          input logic [2:0] v);
    int q;
    q = (JPEG_Q[{u, v}] << level) >> 3;
    if (q < 1) q = 1;
    return 8'(q);
  endfunction

  // Saturate a wide signed value to w bits (w <= 32).
  function automatic logic signed [31:0] sat(input logic signed [47:0] x, input int w);
    logic signed [47:0] hi, lo;
    hi = (48'sd1 <<< (w - 1)) - 48'sd1;
    lo = -(48'sd1 <<< (w - 1));
    if (x > hi) return 32'(hi);
    if (x < lo) return 32'(lo);
    return 32'(x);
  endfunction

endpackage
