// tb_idct_unit: streams random stored coefficient matrices (columns of
// S = Z^T) into the 2-D inverse DCT unit and compares every output column
// of the reconstructed 8x8 block with the reference inverse transform.
// Back-pressure is random in the first half; in the second half the unit
// must sustain one block per 16 cycles. A clr pulse in the middle of a
// block must drop it: the block fed after clr is reconstructed correctly.
`timescale 1ns/1ps
module tb_idct_unit;
  import accel_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  coef_t in_col [8];
  data_t out_col [8];
  localparam int NB = 60;
  blk_t sin [NB];
  int nout = 0, first_fast = -1, last_out = 0;

  idct_unit dut (.clk, .rst_n, .clr, .in_valid, .in_ready, .in_col, .out_valid, .out_ready, .out_col);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      out_ready <= (nout >= NB * 8 / 2) ? 1'b1 : 1'($urandom_range(1));
      if (out_valid && out_ready) begin
        blk_t x;
        int b, i;
        b = nout / 8; i = nout % 8;
        x = idct2(sin[b]);
        for (int n = 0; n < 8; n++) begin
          checks++;
          if (longint'(out_col[n]) != x[n][i]) begin
            failures++;
            if (failures < 10) $display("FAIL blk %0d col %0d row %0d got %0d exp %0d", b, i, n, out_col[n], x[n][i]);
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
      for (int k = 0; k < 8; k++) for (int j = 0; j < 8; j++)
        sin[b][k][j] = (b == 0) ? ((k == 0 && j == 0) ? 524287 : 0) :
                       ((k + j < 5) ? longint'($urandom_range(6000)) - 3000 : 0);
    for (int r = 0; r < 8; r++) in_col[r] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // a partial block (3 columns of garbage), then clr
    for (int j = 0; j < 3; j++) begin
      in_valid <= 1;
      for (int r = 0; r < 8; r++) in_col[r] <= coef_t'($urandom);
      @(posedge clk);
    end
    in_valid <= 0; clr <= 1; @(posedge clk); clr <= 0;
    for (int b = 0; b < NB; b++)
      for (int j = 0; j < 8; j++) begin
        in_valid <= 1;
        for (int r = 0; r < 8; r++) in_col[r] <= coef_t'(sin[b][r][j]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    in_valid <= 0;
    wait (nout == NB * 8);
    checks++;
    if (last_out - first_fast != (NB - NB / 2 - 2) * 16 + 7) begin
      failures++;
      $display("FAIL throughput: %0d cycles for %0d blocks", last_out - first_fast, NB - NB / 2 - 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
