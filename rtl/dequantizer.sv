// dequantizer: inverse of quantizer for one column (paper eq. 9 and 10).
//
// Q1' = Q2 * QT[u][v] (eq. 9), then F' = round(Q1' * dq_mult / 2^dq_shift)
// (eq. 10), where dq_mult/2^dq_shift stands for (Fmax - Fmin) / imax. As in
// the quantiser the Fmin offset is not used, so zero maps to zero. The
// paper also lets the index bits switch off the IDCT multipliers for zero
// inputs; that is a power measure with no effect on values and is not
// modelled. Combinational, result saturated to the coefficient width.
module dequantizer
  import accel_pkg::*;
(
  input  qval_t        in_col [8],
  input  logic [2:0]   col_idx,
  input  logic [1:0]   level,
  input  logic [15:0]  dq_mult,
  input  logic [4:0]   dq_shift,
  output coef_t        out_col [8]
);
  logic signed [QM+8:0] q1;
  logic signed [40:0]   f;

  always_comb begin
    for (int r = 0; r < 8; r++) begin
      q1 = (QM+9)'(in_col[r]) * $signed({1'b0, qt_value(level, col_idx, 3'(r))});
      f  = 41'(q1) * $signed({1'b0, dq_mult});
      if (dq_shift != 0) f = (f + (41'sd1 <<< (dq_shift - 1))) >>> dq_shift;
      out_col[r] = coef_t'(sat(48'(f), Z_W));
    end
  end
endmodule
