// tb_pe_unit: checks one PE unit. In 3x3 mode random columns are shifted
// into the three-column window (shift on one cycle in four, as in the
// array's schedule, with a new filter's weights every cycle) and the two
// adder outputs are compared with a window model: out[0] sums the PE rows
// of group A, out[1] those of group B, with tap j using the column that
// arrived 2 - j shifts ago. In 1x1 mode the eight products of PE (r, j),
// PE (2,2) off, must appear on out[3r + j]. One cycle of latency.
`timescale 1ns/1ps
module tb_pe_unit;
  import accel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic mode1x1 = 0, in_valid = 0, shift = 0, out_valid;
  data_t d [3];
  data_t pw [3][3];
  logic grp_b [3];
  psum_t out [8];
  longint win [3][3];
  longint exp_q [$][8];

  pe_unit dut (.clk, .rst_n, .mode1x1, .in_valid, .shift, .d, .pw, .grp_b, .out_valid, .out);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk)
    if (rst_n && out_valid) begin
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (longint'(out[k]) != exp_q[0][k]) begin
          failures++;
          if (failures < 10) $display("FAIL out[%0d] got %0d exp %0d", k, out[k], exp_q[0][k]);
        end
      end
      void'(exp_q.pop_front());
    end

  initial begin
    for (int r = 0; r < 3; r++) begin
      d[r] = '0; grp_b[r] = 0;
      for (int j = 0; j < 3; j++) begin pw[r][j] = '0; win[r][j] = 0; end
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 600; t++) begin
      longint ld [3], lw [3][3], e [8];
      bit lg [3], one, sh;
      one = (t >= 400);
      sh = (t % 4 == 0);
      for (int r = 0; r < 3; r++) begin
        ld[r] = int'($urandom_range(2000)) - 1000; d[r] <= data_t'(ld[r]);
        lg[r] = 1'($urandom_range(1)); grp_b[r] <= lg[r];
        for (int j = 0; j < 3; j++) begin lw[r][j] = int'($urandom_range(200)) - 100; pw[r][j] <= data_t'(lw[r][j]); end
      end
      for (int k = 0; k < 8; k++) e[k] = 0;
      if (one) begin
        for (int k = 0; k < 8; k++) e[k] = ld[k/3] * lw[k/3][k%3];
      end else begin
        if (sh) for (int r = 0; r < 3; r++) begin win[r][2] = win[r][1]; win[r][1] = win[r][0]; win[r][0] = ld[r]; end
        for (int r = 0; r < 3; r++) for (int j = 0; j < 3; j++)
          e[lg[r] ? 1 : 0] += win[r][2 - j] * lw[r][j];
      end
      exp_q.push_back(e);
      mode1x1 <= one; shift <= sh; in_valid <= 1;
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
