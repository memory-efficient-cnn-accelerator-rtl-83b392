// tb_dct_1d: checks the combinational 8-point DCT against a direct matrix
// product built from cos() (tb_ref_pkg::cm), for random columns and for
// the extreme inputs (all +max, all -max, alternating), where the even/odd
// butterfly of the design must still match the plain sum exactly.
`timescale 1ns/1ps
module tb_dct_1d;
  import accel_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic signed [15:0] x [8];
  logic signed [17:0] y [8];

  dct_1d #(.IN_W(16), .OUT_W(18)) dut (.x, .y);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int n = 0; n < 8; n++)
        case (t)
          0: x[n] = 16'sh7fff;
          1: x[n] = -16'sh8000;
          2: x[n] = n[0] ? 16'sh7fff : -16'sh8000;
          default: x[n] = 16'($urandom);
        endcase
      @(posedge clk);
      for (int k = 0; k < 8; k++) begin
        longint a; a = 0;
        for (int n = 0; n < 8; n++) a += cm(k, n) * longint'(x[n]);
        checks++;
        if (longint'(y[k]) != satw(rsh(a, 14), 18)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d k=%0d got %0d exp %0d", t, k, y[k], satw(rsh(a, 14), 18));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
