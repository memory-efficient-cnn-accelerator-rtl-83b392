// tb_pe_data_mux: checks the data and weight routing of the PE unit
// multiplexers for unit 0 (rows 0, 0, 1 with filter rows 2, 1, 2; PE row 0
// alone forms PSUM'6), a middle unit (rows U-1, U, U+1 with filter rows
// 0, 1, 2), unit 7 (rows 6, 7, 7 with filter rows 0, 1, 0; PE row 2 alone
// forms PSUM''7), and the 1x1 mode, where every PE row sees row U and the
// nine weights are used as they come. The expected routing is written out
// per unit from the description of the PE array.
`timescale 1ns/1ps
module tb_pe_data_mux;
  import accel_pkg::*;
  logic clk = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic mode1x1;
  data_t rows [8];
  data_t w [9];
  data_t d [4][3];
  data_t pw [4][3][3];
  logic grp_b [4][3];
  localparam int UNITS [4] = '{0, 1, 4, 7};

  for (genvar k = 0; k < 4; k++) begin : g_u
    pe_data_mux #(.U(UNITS[k])) dut (.mode1x1, .rows, .w, .d(d[k]), .pw(pw[k]), .grp_b(grp_b[k]));
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int t = 0; t < 200; t++) begin
      mode1x1 = t[0];
      for (int r = 0; r < 8; r++) rows[r] = data_t'($urandom);
      for (int k = 0; k < 9; k++) w[k] = data_t'($urandom);
      @(posedge clk);
      for (int k = 0; k < 4; k++) begin
        int u, dr [3], wr [3];
        bit gb [3];
        u = UNITS[k];
        case (u)
          0: begin dr = '{0, 0, 1}; wr = '{2, 1, 2}; gb = '{0, 1, 1}; end
          7: begin dr = '{6, 7, 7}; wr = '{0, 1, 0}; gb = '{0, 0, 1}; end
          default: begin dr = '{u - 1, u, u + 1}; wr = '{0, 1, 2}; gb = '{0, 0, 0}; end
        endcase
        for (int r = 0; r < 3; r++) begin
          expect_eq(d[k][r], mode1x1 ? rows[u] : rows[dr[r]], $sformatf("unit %0d data row %0d", u, r));
          expect_eq(grp_b[k][r], mode1x1 ? 0 : gb[r], $sformatf("unit %0d group %0d", u, r));
          for (int j = 0; j < 3; j++)
            expect_eq(pw[k][r][j], mode1x1 ? w[3*r + j] : w[3*wr[r] + j], $sformatf("unit %0d weight %0d,%0d", u, r, j));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
