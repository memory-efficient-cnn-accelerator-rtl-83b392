// tb_dct_unit: streams random 8x8 blocks, one column per cycle, into the
// 2-D DCT unit and compares every output column (the stored matrix
// S = Z^T, column i with out_idx = i) with the reference 2-D DCT. The
// output side is randomly back-pressured in the first half of the run;
// in the second half both sides are always ready and the unit must then
// sustain one block per 16 cycles (8 load + 8 emit).
`timescale 1ns/1ps
module tb_dct_unit;
  import accel_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  data_t in_col [8];
  coef_t out_col [8];
  logic [2:0] out_idx;
  localparam int NB = 60;
  blk_t xin [NB];
  int nout = 0, first_fast = -1, last_out = 0;

  dct_unit dut (.clk, .rst_n, .in_valid, .in_ready, .in_col, .out_valid, .out_ready, .out_col, .out_idx);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      out_ready <= (nout >= NB * 8 / 2) ? 1'b1 : 1'($urandom_range(1));
      if (out_valid && out_ready) begin
        blk_t s;
        int b, i;
        b = nout / 8; i = nout % 8;
        s = dct2(xin[b]);
        checks++;
        if (out_idx != 3'(i)) begin failures++; $display("FAIL out_idx %0d exp %0d", out_idx, i); end
        for (int r = 0; r < 8; r++) begin
          checks++;
          if (longint'(out_col[r]) != s[r][i]) begin
            failures++;
            if (failures < 10) $display("FAIL blk %0d col %0d row %0d got %0d exp %0d", b, i, r, out_col[r], s[r][i]);
          end
        end
        if (b == NB / 2 + 1 && i == 0) first_fast = cyc;
        last_out = cyc;
        nout++;
      end
    end
  end

  initial begin
    for (int b = 0; b < NB; b++)
      for (int y = 0; y < 8; y++) for (int c = 0; c < 8; c++)
        xin[b][y][c] = (b == 0) ? ((y + c) % 2 == 0 ? 32767 : -32768) : longint'($urandom_range(4000)) - 2000;
    for (int r = 0; r < 8; r++) in_col[r] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int b = 0; b < NB; b++)
      for (int j = 0; j < 8; j++) begin
        in_valid <= 1;
        for (int r = 0; r < 8; r++) in_col[r] <= data_t'(xin[b][r][j]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    in_valid <= 0;
    wait (nout == NB * 8);
    checks++;
    // blocks NB/2+1 .. NB-1 leave at full rate: 16 cycles per block
    if (last_out - first_fast != (NB - NB / 2 - 2) * 16 + 7) begin
      failures++;
      $display("FAIL throughput: %0d cycles for %0d blocks", last_out - first_fast, NB - NB / 2 - 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
