// quantizer: two-step quantisation of one column of DCT coefficients.
//
// Step 1 (paper eq. 7, "low-precision GEMM"): scale the coefficient into an
// m-bit integer, Q1 = round(F * q_mult / 2^q_shift), where q_mult/2^q_shift
// stands for imax / (Fmax - Fmin), a per-layer constant found off line.
// Step 2 (eq. 8): Q2 = round(Q1 / QT[u][v]), QT chosen by the 2-bit level.
//
// Departure from eq. 7: the paper also subtracts Fmin, which would move
// every near-zero coefficient to the middle of the integer range and leave
// nothing for the sparse encoder to drop. Here zero maps to zero: Q1 and
// Q2 are signed, saturated to +-(2^(m-1)-1). Rounding is half away from
// zero.
//
// Element r of input column i is coefficient Z[i][r] (columns are rows of
// Z, see dct_unit), so it is divided by QT[i][r]. Combinational.
module quantizer
  import accel_pkg::*;
(
  input  coef_t        in_col [8],
  input  logic [2:0]   col_idx,
  input  logic [1:0]   level,
  input  logic [15:0]  q_mult,
  input  logic [4:0]   q_shift,
  output qval_t        out_col [8]
);
  localparam int QMAX = (1 << (QM - 1)) - 1;

  logic signed [37:0] prod;
  logic signed [37:0] q1w;
  logic [QM-1:0]      mag;
  logic [7:0]         qt;
  logic [QM+7:0]      quo;

  always_comb begin
    for (int r = 0; r < 8; r++) begin
      prod = 38'(in_col[r]) * $signed({1'b0, q_mult});
      if (q_shift == 0) q1w = prod;
      else              q1w = (prod + (38'sd1 <<< (q_shift - 1))) >>> q_shift;
      if (q1w > QMAX)       q1w = QMAX;
      else if (q1w < -QMAX) q1w = -QMAX;
      mag = q1w[37] ? QM'(-q1w) : QM'(q1w);
      qt  = qt_value(level, col_idx, 3'(r));
      quo = ({8'd0, mag} + (QM+8)'(qt >> 1)) / (QM+8)'(qt);
      out_col[r] = q1w[37] ? -qval_t'(quo) : qval_t'(quo);
    end
  end
endmodule
