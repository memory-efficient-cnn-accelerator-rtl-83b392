// idct_unit: 2-D 8x8 inverse DCT of one channel, column in, column out.
//
// Input columns are the columns of the stored matrix S = Z^T (see
// dct_unit). LOAD phase: eight columns arrive, each is transformed,
// V[:,j] = C^T S[:,j], and kept in a transpose register. EMIT phase:
// row i of V through the same 32-CCM 1-D inverse transform gives column i
// of the reconstructed feature block X (since X^T = C^T S C). This is the
// two-step flow of the paper's Fig. 7: the first product finishes after
// eight columns, then the second produces the feature map column by column.
//
// Throughput one block per 16 cycles. valid/ready handshakes on both sides.
// Output values are saturated to 16 bits. clr drops a partly loaded or
// partly emitted block (used when the input stream restarts).
module idct_unit
  import accel_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic        in_valid,
  output logic        in_ready,
  input  coef_t       in_col [8],
  output logic        out_valid,
  input  logic        out_ready,
  output data_t       out_col [8]
);
  logic       emit;
  logic [2:0] cnt;
  coef_t      vbuf [8][8];
  coef_t      t_in  [8];
  coef_t      t_out [8];

  always_comb for (int r = 0; r < 8; r++) t_in[r] = emit ? vbuf[cnt][r] : in_col[r];

  idct_1d #(.IN_W(Z_W), .OUT_W(Z_W)) u_ccm (.y(t_in), .x(t_out));

  assign in_ready  = !emit;
  assign out_valid = emit;
  always_comb for (int r = 0; r < 8; r++) out_col[r] = data_t'(sat(48'(t_out[r]), DATA_W));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      emit <= 1'b0;
      cnt  <= '0;
    end else if (clr) begin
      emit <= 1'b0;
      cnt  <= '0;
    end else if (!emit && in_valid) begin
      for (int r = 0; r < 8; r++) vbuf[r][cnt] <= t_out[r];
      cnt <= cnt + 3'd1;
      if (cnt == 3'd7) emit <= 1'b1;
    end else if (emit && out_ready) begin
      cnt <= cnt + 3'd1;
      if (cnt == 3'd7) emit <= 1'b0;
    end
  end
endmodule
