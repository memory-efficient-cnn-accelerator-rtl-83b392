// tb_nonlinear: drives the non-linear module with random channel-summed
// partial sums, column by column over four 8-row frames of a 16-column
// map with four output channel lanes, under random output back-pressure,
// for five configurations that together use every operation and order:
//   BN -> leaky ReLU (no pooling); max pool -> PReLU; BN -> average pool
//   -> ReLU; ReLU -> BN -> max pool; PReLU -> average pool -> BN.
// The expected output is computed per pixel by a plain model (requantise,
// pre-ops, 2x2 pooling over whole frames, post-ops) and compared column
// by column in output order.
`timescale 1ns/1ps
module tb_nonlinear;
  import accel_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  nl_cfg_t cfg;
  logic [4:0] psum_shift = 5'd3;
  bn_par_t bn [4];
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  psum_t in_col [4][8];
  logic [8:0] in_c = '0;
  logic in_rf_odd = 0;
  data_t out_col [4][8];
  localparam int W = 16, H = 32;
  longint ps [4][H][W];
  longint o [4][H][W];
  longint exp_q [$][4][8];
  int n_out = 0;

  nonlinear #(.MAX_W(64)) dut (.clk, .rst_n, .cfg, .psum_shift, .bn, .in_valid, .in_ready, .in_col,
                               .in_c, .in_rf_odd, .out_valid, .out_ready, .out_col);

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint pw(pw_op_e op, longint x, int ch, nl_cfg_t c);
    if (op == PW_BN) return satw(((x * bn[ch].gamma) >>> c.bn_shift) + bn[ch].beta, 16);
    if (op == PW_ACT && x < 0) begin
      case (c.act)
        ACT_RELU:  return 0;
        ACT_LEAKY: return x >>> c.leaky_shift;
        ACT_PRELU: return satw((x * bn[ch].alpha) >>> 8, 16);
        default:   return x;
      endcase
    end
    return x;
  endfunction

  always @(posedge clk) begin
    out_ready <= 1'($urandom_range(3) != 0);
    if (out_valid && out_ready) begin
      for (int l = 0; l < 4; l++) for (int r = 0; r < 8; r++) begin
        checks++;
        if (exp_q.size() == 0 || longint'(out_col[l][r]) != exp_q[0][l][r]) begin
          failures++;
          if (failures < 10) $display("FAIL out %0d lane %0d row %0d got %0d exp %0d", n_out, l, r, out_col[l][r],
                                      exp_q.size() ? exp_q[0][l][r] : 0);
        end
      end
      if (exp_q.size()) void'(exp_q.pop_front());
      n_out++;
    end
  end

  task automatic run(nl_cfg_t c);
    int Ho, Wo;
    cfg <= c;
    for (int l = 0; l < 4; l++) begin
      bn[l].gamma <= 16'(8 + $urandom_range(40)); bn[l].beta <= 16'(int'($urandom_range(60)) - 30);
      bn[l].alpha <= 16'(10 + $urandom_range(200));
    end
    @(posedge clk);
    for (int l = 0; l < 4; l++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      longint a;
      ps[l][y][x] = int'($urandom_range(4000)) - 2000;
      a = satw(rsh(ps[l][y][x], psum_shift), 16);
      a = pw(c.pre_op0, a, l, c);
      a = pw(c.pre_op1, a, l, c);
      o[l][y][x] = a;
    end
    Ho = c.pool_en ? H / 2 : H;
    Wo = c.pool_en ? W / 2 : W;
    for (int l = 0; l < 4; l++) for (int y = 0; y < Ho; y++) for (int x = 0; x < Wo; x++) begin
      longint a;
      if (c.pool_en) begin
        longint p0, p1, p2, p3;
        p0 = o[l][2*y][2*x]; p1 = o[l][2*y+1][2*x]; p2 = o[l][2*y][2*x+1]; p3 = o[l][2*y+1][2*x+1];
        if (c.pool_avg) a = (p0 + p1 + p2 + p3 + 2) >>> 2;
        else begin a = p0; if (p1 > a) a = p1; if (p2 > a) a = p2; if (p3 > a) a = p3; end
      end else a = o[l][y][x];
      a = pw(c.post_op0, a, l, c);
      o[l][y][x] = pw(c.post_op1, a, l, c);
    end
    for (int f = 0; f < Ho / 8; f++) for (int x = 0; x < Wo; x++) begin
      longint e [4][8];
      for (int l = 0; l < 4; l++) for (int r = 0; r < 8; r++) e[l][r] = o[l][8*f + r][x];
      exp_q.push_back(e);
    end
    for (int rf = 0; rf < H / 8; rf++)
      for (int x = 0; x < W; x++) begin
        for (int l = 0; l < 4; l++) for (int r = 0; r < 8; r++) in_col[l][r] <= psum_t'(ps[l][8*rf + r][x]);
        in_c <= 9'(x); in_rf_odd <= rf[0]; in_valid <= 1;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    in_valid <= 0;
    wait (exp_q.size() == 0);
    repeat (4) @(posedge clk);
  endtask

  initial begin
    for (int l = 0; l < 4; l++) begin
      bn[l] = '0;
      for (int r = 0; r < 8; r++) in_col[l][r] = '0;
    end
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run('{pre_op0: PW_BN, pre_op1: PW_ACT, post_op0: PW_NONE, post_op1: PW_NONE, pool_en: 0, pool_avg: 0,
          act: ACT_LEAKY, leaky_shift: 3'd2, bn_shift: 4'd4});
    run('{pre_op0: PW_NONE, pre_op1: PW_NONE, post_op0: PW_ACT, post_op1: PW_NONE, pool_en: 1, pool_avg: 0,
          act: ACT_PRELU, leaky_shift: 3'd0, bn_shift: 4'd4});
    run('{pre_op0: PW_BN, pre_op1: PW_NONE, post_op0: PW_ACT, post_op1: PW_NONE, pool_en: 1, pool_avg: 1,
          act: ACT_RELU, leaky_shift: 3'd0, bn_shift: 4'd5});
    run('{pre_op0: PW_ACT, pre_op1: PW_BN, post_op0: PW_NONE, post_op1: PW_NONE, pool_en: 1, pool_avg: 0,
          act: ACT_RELU, leaky_shift: 3'd0, bn_shift: 4'd3});
    run('{pre_op0: PW_ACT, pre_op1: PW_NONE, post_op0: PW_NONE, post_op1: PW_BN, pool_en: 1, pool_avg: 1,
          act: ACT_PRELU, leaky_shift: 3'd0, bn_shift: 4'd4});
    checks++;
    if (n_out != 64 + 4 * 16) begin failures++; $display("FAIL %0d output columns", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
