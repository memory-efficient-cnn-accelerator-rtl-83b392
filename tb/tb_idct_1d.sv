// tb_idct_1d: checks the combinational 8-point inverse DCT (x = C^T y)
// against a direct matrix product built from cos(), for random and extreme
// 20-bit coefficient columns, including saturation at the output.
`timescale 1ns/1ps
module tb_idct_1d;
  import accel_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic signed [19:0] y [8];
  logic signed [19:0] x [8];

  idct_1d #(.IN_W(20), .OUT_W(20)) dut (.y, .x);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int k = 0; k < 8; k++)
        case (t)
          0: y[k] = 20'sh7ffff;
          1: y[k] = -20'sh80000;
          2: y[k] = (k == 0) ? 20'sh7ffff : 20'sh0;
          default: y[k] = (t < 1000) ? 20'($urandom) : 20'(int'($urandom_range(4000)) - 2000);
        endcase
      @(posedge clk);
      for (int n = 0; n < 8; n++) begin
        longint a; a = 0;
        for (int k = 0; k < 8; k++) a += cm(k, n) * longint'(y[k]);
        checks++;
        if (longint'(x[n]) != satw(rsh(a, 14), 20)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d n=%0d got %0d exp %0d", t, n, x[n], satw(rsh(a, 14), 20));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
