// tb_pe_array: drives the 288-PE array with random input columns for the
// four channels, following the 3x3 schedule (a new column with shift = 1,
// then three more filters on the same window), and checks all ten partial
// sums per cycle against a direct model: PSUM0..5 are full 3x3 sums over
// rows x..x+2, PSUM'6/PSUM'7 use only rows 0 and 1 (with filter rows 2 and
// 1, 2), PSUM''6/PSUM''7 use rows 6, 7 (filter rows 0, 1 and 0), all summed
// over the four channels. Checks the 2-cycle latency with the tag, the
// rate of four filters in four cycles per input column, then switches to
// 1x1 mode and checks 8 filters x 8 rows per cycle.
`timescale 1ns/1ps
module tb_pe_array;
  import accel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic mode1x1 = 0, in_valid = 0, shift = 0;
  logic [15:0] in_tag = '0, out_tag;
  data_t col [4][8];
  data_t w [4][9];
  logic out_valid;
  psum_t psum [64];
  longint exp_q [$][64];
  int tag_q [$];
  longint win [4][8][3];     // [ch][row][age], age 0 newest
  int n_cols = 0, n_out = 0, t_first = -1, t_last = 0, cyc = 0;

  pe_array #(.TAG_W(16)) dut (.clk, .rst_n, .mode1x1, .in_valid, .shift, .in_tag, .col, .w,
                              .out_valid, .out_tag, .psum);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // tap j of a window is the column of age 2 - j
  function automatic longint tap(int ch, int row, int j);
    return win[ch][row][2 - j];
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      checks++;
      if (tag_q.size() == 0 || out_tag != 16'(tag_q[0])) begin failures++; $display("FAIL tag"); end
      for (int k = 0; k < 64; k++) begin
        checks++;
        if (longint'(psum[k]) != exp_q[0][k]) begin
          failures++;
          if (failures < 10) $display("FAIL out %0d psum %0d got %0d exp %0d", n_out, k, psum[k], exp_q[0][k]);
        end
      end
      void'(exp_q.pop_front()); void'(tag_q.pop_front());
      if (n_out == 0) t_first = cyc;
      t_last = cyc;
      n_out++;
    end
  end

  task automatic drive(bit one, bit sh);
    longint e [64];
    longint lc [4][8], lw [4][9];
    for (int ch = 0; ch < 4; ch++) begin
      for (int r = 0; r < 8; r++) begin lc[ch][r] = int'($urandom_range(400)) - 200; col[ch][r] <= data_t'(lc[ch][r]); end
      for (int k = 0; k < 9; k++) begin lw[ch][k] = int'($urandom_range(60)) - 30; w[ch][k] <= data_t'(lw[ch][k]); end
    end
    if (sh && !one)
      for (int ch = 0; ch < 4; ch++) for (int r = 0; r < 8; r++) begin
        win[ch][r][2] = win[ch][r][1]; win[ch][r][1] = win[ch][r][0]; win[ch][r][0] = lc[ch][r];
      end
    for (int k = 0; k < 64; k++) e[k] = 0;
    for (int ch = 0; ch < 4; ch++)
      if (one) begin
        for (int r = 0; r < 8; r++) for (int k = 0; k < 8; k++) e[8*r + k] += lc[ch][r] * lw[ch][k];
      end else begin
        for (int j = 0; j < 3; j++) begin
          for (int x = 0; x < 6; x++)
            for (int i = 0; i < 3; i++) e[x] += tap(ch, x + i, j) * lw[ch][3*i + j];
          e[6] += tap(ch, 0, j) * lw[ch][6 + j];
          e[7] += tap(ch, 0, j) * lw[ch][3 + j] + tap(ch, 1, j) * lw[ch][6 + j];
          e[8] += tap(ch, 6, j) * lw[ch][j] + tap(ch, 7, j) * lw[ch][3 + j];
          e[9] += tap(ch, 7, j) * lw[ch][j];
        end
      end
    exp_q.push_back(e);
    tag_q.push_back(n_cols);
    in_tag <= 16'(n_cols);
    mode1x1 <= one; shift <= sh; in_valid <= 1;
    n_cols++;
    @(posedge clk);
  endtask

  initial begin
    for (int ch = 0; ch < 4; ch++) for (int r = 0; r < 8; r++) begin
      col[ch][r] = '0;
      for (int a = 0; a < 3; a++) win[ch][r][a] = 0;
    end
    for (int ch = 0; ch < 4; ch++) for (int k = 0; k < 9; k++) w[ch][k] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // 3x3: 40 input columns, 4 filters each, back to back
    for (int c = 0; c < 40; c++)
      for (int f = 0; f < 4; f++) drive(1'b0, f == 0);
    in_valid <= 0;
    wait (n_out == 160);
    checks++;
    if (t_last - t_first != 159) begin failures++; $display("FAIL rate: %0d cycles for 160 outputs", t_last - t_first + 1); end
    // 1x1 mode
    for (int c = 0; c < 40; c++) drive(1'b1, 1'b0);
    in_valid <= 0;
    wait (n_out == 200);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
