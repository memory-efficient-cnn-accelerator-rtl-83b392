// tb_quantizer: checks both quantisation steps for every column index and
// every Q-table level: the min-max style scaling (multiply, shift, round,
// clip to +-127) and the division by the level's Q-table entry with
// rounding half away from zero. The expected values come from the
// reference model, which builds the Q-table from the JPEG luminance table.
// Also checks that the coarsest level produces more zeros than the finest.
`timescale 1ns/1ps
module tb_quantizer;
  import accel_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  coef_t in_col [8];
  logic [2:0] col_idx;
  logic [1:0] level;
  logic [15:0] q_mult;
  logic [4:0] q_shift;
  qval_t out_col [8];
  int zeros [4] = '{default: 0};

  quantizer dut (.in_col, .col_idx, .level, .q_mult, .q_shift, .out_col);

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
      q_mult = (t < 40) ? 16'hffff : 16'(100 + $urandom_range(2000));
      q_shift = 5'(12 + $urandom_range(4));
      for (int r = 0; r < 8; r++)
        in_col[r] = (t < 40) ? ((r < 4) ? 20'sh7ffff : -20'sh80000) : coef_t'(int'($urandom_range(8000)) - 4000);
      @(posedge clk);
      for (int r = 0; r < 8; r++) begin
        longint e; e = quant(longint'(in_col[r]), level, col_idx, r, q_mult, q_shift);
        checks++;
        if (out_col[r] == 0) zeros[level]++;
        if (longint'(out_col[r]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d r=%0d got %0d exp %0d", t, r, out_col[r], e);
        end
      end
    end
    checks++;
    if (!(zeros[3] > zeros[0])) begin failures++; $display("FAIL level 3 not coarser than level 0"); end
    $display("zeros per level: %0d %0d %0d %0d", zeros[0], zeros[1], zeros[2], zeros[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
