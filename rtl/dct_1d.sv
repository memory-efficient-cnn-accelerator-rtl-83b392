// dct_1d: 8-point 1-D DCT-II of one 8x1 column, y = C * x.
//
// Uses the paper's even/odd decomposition (eq. 13-17): the bottom half of
// the column is reversed and added to / subtracted from the top half, then
// a 4x4 Ce block (constants a, f, g) gives the even outputs and a 4x4 Co
// block (constants b, c, d, e) the odd outputs. That is 32 constant-
// coefficient multipliers (CCMs) per column, the count the paper gives for
// one channel. The constant products synthesise to shift-add networks.
//
// Combinational. Each output is rounded to nearest (COEF_FRAC fraction
// bits dropped) and saturated to OUT_W bits; with OUT_W = IN_W + 2 the
// saturation never triggers.
module dct_1d
  import accel_pkg::*;
#(
  parameter int IN_W  = 16,
  parameter int OUT_W = 18
) (
  input  logic signed [IN_W-1:0]  x [8],
  output logic signed [OUT_W-1:0] y [8]
);
  localparam logic signed [15:0] CE_M [4][4] = '{
    '{CA,  CA,  CA,  CA},
    '{CF,  CG, -CG, -CF},
    '{CA, -CA, -CA,  CA},
    '{CG, -CF,  CF, -CG}};
  localparam logic signed [15:0] CO_M [4][4] = '{
    '{CB,  CC,  CD,  CE},
    '{CC, -CE, -CB, -CD},
    '{CD, -CB,  CE,  CC},
    '{CE, -CD,  CC, -CB}};

  logic signed [IN_W:0]   s [4];   // x_up + P x_bottom
  logic signed [IN_W:0]   d [4];   // x_up - P x_bottom
  logic signed [IN_W+18:0] acc_e [4];
  logic signed [IN_W+18:0] acc_o [4];

  always_comb begin
    for (int n = 0; n < 4; n++) begin
      s[n] = (IN_W+1)'(x[n]) + (IN_W+1)'(x[7-n]);
      d[n] = (IN_W+1)'(x[n]) - (IN_W+1)'(x[7-n]);
    end
    for (int k = 0; k < 4; k++) begin
      acc_e[k] = '0;
      acc_o[k] = '0;
      for (int n = 0; n < 4; n++) begin
        acc_e[k] += s[n] * CE_M[k][n];
        acc_o[k] += d[n] * CO_M[k][n];
      end
      y[2*k]   = OUT_W'(sat(48'((acc_e[k] + (1 <<< (COEF_FRAC-1))) >>> COEF_FRAC), OUT_W));
      y[2*k+1] = OUT_W'(sat(48'((acc_o[k] + (1 <<< (COEF_FRAC-1))) >>> COEF_FRAC), OUT_W));
    end
  end
endmodule
