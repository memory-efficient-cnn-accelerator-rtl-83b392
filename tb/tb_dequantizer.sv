// tb_dequantizer: checks the inverse of the two-step quantisation, value =
// q * QT[level][col][row] * mult >> shift (rounded, saturated to 20 bits),
// for every column index and level, against the reference model.
`timescale 1ns/1ps
module tb_dequantizer;
  import accel_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  qval_t in_col [8];
  logic [2:0] col_idx;
  logic [1:0] level;
  logic [15:0] dq_mult;
  logic [4:0] dq_shift;
  coef_t out_col [8];

  dequantizer dut (.in_col, .col_idx, .level, .dq_mult, .dq_shift, .out_col);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      level = 2'(t % 4);
      col_idx = 3'((t / 4) % 8);
      dq_mult = (t < 40) ? 16'hffff : 16'(1 + $urandom_range(300));
      dq_shift = 5'($urandom_range(8));
      for (int r = 0; r < 8; r++)
        in_col[r] = (t < 40) ? ((r < 4) ? 8'sd127 : -8'sd127) : qval_t'(int'($urandom_range(254)) - 127);
      @(posedge clk);
      for (int r = 0; r < 8; r++) begin
        longint e; e = dequant(longint'(in_col[r]), level, col_idx, r, dq_mult, dq_shift);
        checks++;
        if (longint'(out_col[r]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d r=%0d got %0d exp %0d", t, r, out_col[r], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
