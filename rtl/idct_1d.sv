// idct_1d: 8-point 1-D inverse DCT (DCT-III) of one 8x1 column, x = C^T * y.
//
// Mirror of dct_1d: the even coefficients y[0,2,4,6] go through Ce^T and
// the odd ones y[1,3,5,7] through Co^T (32 constant-coefficient
// multipliers); a final butterfly gives x[n] = E[n] + O[n] and
// x[7-n] = E[n] - O[n]. The paper names the IDCT unit and its 128 CCMs
// for four channels; the butterfly order is this design's choice.
//
// Combinational; outputs rounded to nearest and saturated to OUT_W bits.
module idct_1d
  import accel_pkg::*;
#(
  parameter int IN_W  = 20,
  parameter int OUT_W = 20
) (
  input  logic signed [IN_W-1:0]  y [8],
  output logic signed [OUT_W-1:0] x [8]
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

  logic signed [IN_W+19:0] e [4];
  logic signed [IN_W+19:0] o [4];

  always_comb begin
    for (int n = 0; n < 4; n++) begin
      e[n] = '0;
      o[n] = '0;
      for (int k = 0; k < 4; k++) begin
        e[n] += y[2*k]   * CE_M[k][n];
        o[n] += y[2*k+1] * CO_M[k][n];
      end
    end
    for (int n = 0; n < 4; n++) begin
      x[n]   = OUT_W'(sat(48'(((e[n] + o[n]) + (1 <<< (COEF_FRAC-1))) >>> COEF_FRAC), OUT_W));
      x[7-n] = OUT_W'(sat(48'(((e[n] - o[n]) + (1 <<< (COEF_FRAC-1))) >>> COEF_FRAC), OUT_W));
    end
  end
endmodule
