// pe_unit: one 3x3 PE unit (9 multipliers and an adder tree), paper Fig. 8.
//
// 3x3 mode: each PE row keeps the last three input columns of its data row
// in a shift register; on a cycle with shift = 1 the new column enters
// (data moves one PE to the right). The PE in tap column j multiplies the
// column (c + j) by weight pw[r][j], where c + 2 is the newest column, so
// the unit produces output column c when column c + 2 arrives. The adder
// sums the rows with grp_b = 0 into out[0] and the others into out[1].
// Without shift the window stays and new weights (another filter) can be
// applied: four filters are applied in four cycles to one column.
// 1x1 mode: PE (r, j) multiplies the current input by pw[r][j] and gives
// out[3r + j] for eight filters; PE (2,2) is off (MODE register).
//
// One register stage: out_* are valid the cycle after in_valid.
module pe_unit
  import accel_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  mode1x1,
  input  logic  in_valid,
  input  logic  shift,
  input  data_t d [3],
  input  data_t pw [3][3],
  input  logic  grp_b [3],
  output logic  out_valid,
  output psum_t out [8]
);
  data_t win   [3][3];   // win[r][0] newest
  data_t win_e [3][3];
  psum_t prod  [3][3];
  psum_t sum_a, sum_b;
  psum_t res   [8];

  always_comb begin
    for (int r = 0; r < 3; r++) begin
      if (shift) begin
        win_e[r][0] = d[r];
        win_e[r][1] = win[r][0];
        win_e[r][2] = win[r][1];
      end else begin
        win_e[r] = win[r];
      end
    end
    sum_a = '0;
    sum_b = '0;
    for (int r = 0; r < 3; r++)
      for (int j = 0; j < 3; j++) begin
        if (mode1x1) prod[r][j] = (r == 2 && j == 2) ? '0 : psum_t'(d[r] * pw[r][j]);
        else         prod[r][j] = psum_t'(win_e[r][2-j] * pw[r][j]);
        if (grp_b[r]) sum_b += prod[r][j];
        else          sum_a += prod[r][j];
      end
    for (int k = 0; k < 8; k++) res[k] = '0;
    if (mode1x1) begin
      for (int k = 0; k < 8; k++) res[k] = prod[k/3][k%3];
    end else begin
      res[0] = sum_a;
      res[1] = sum_b;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int r = 0; r < 3; r++) for (int j = 0; j < 3; j++) win[r][j] <= '0;
      for (int k = 0; k < 8; k++) out[k] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        win <= win_e;
        out <= res;
      end
    end
  end
endmodule
