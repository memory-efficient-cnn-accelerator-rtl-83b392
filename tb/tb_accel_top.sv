// tb_accel_top: end-to-end test of the accelerator at its default sizes.
//
// Runs two fusion layers from an instruction program:
//   layer 1: 16x16 input, 8 channels -> 8 filters, 3x3, BN -> max pool ->
//            ReLU, output 8x8 (compressed into buffer B);
//   layer 2: reads layer 1's output (ping-pong), 8x8, 8 -> 4 filters,
//            PReLU -> BN, no pooling, output into buffer A, with two
//            configurable sub-banks given to the scratch pad.
// The compressed input of layer 1 is generated here (random sparse
// quantised blocks), encoded with the flip storage scheme and written
// through the feature map DMA port. A reference model (tb_ref_pkg) runs the
// whole chain - decode, dequantise, IDCT, convolution, non-linear ops, DCT,
// quantise - and both layers' compressed outputs are read back, decoded
// and compared value by value. The number of PE array cycles is checked
// against 4 cycles per input column, and each mechanism (zero-padding
// columns, PSUM' / PSUM'' row-frame overlap, channel-group accumulation,
// pooling, BN, activations, ping-pong swap, weight preload) is counted and
// must occur. Stalls on decompressed data are counted and reported only:
// the decompression path delivers exactly one column per four cycles, so
// the PE array rarely has to wait.
`timescale 1ns/1ps
module tb_accel_top;
  import accel_pkg::*;
  import tb_ref_pkg::*;

  localparam int FA_W = 15, IA_W = 11;

  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;

  logic cdma_valid = 0, cdma_ready, enable = 0;
  logic [63:0] cdma_data = '0;
  logic wdma_valid = 0, wdma_ready;
  logic [15:0] wdma_data = '0;
  logic ddma_wr_buf = 0, ddma_rd_buf = 0;
  logic [7:0] ddma_we = '0, ddma_re = '0;
  logic [FA_W-1:0] ddma_waddr [8], ddma_raddr [8];
  qval_t ddma_wdata [8], ddma_rdata [8];
  logic ddma_idx_wr_half = 0, ddma_idx_we = 0, ddma_idx_rd_half = 0, ddma_idx_re = 0;
  logic [IA_W-1:0] ddma_idx_waddr = '0, ddma_idx_raddr = '0;
  logic [63:0] ddma_idx_wdata = '0, ddma_idx_rdata;
  logic running, halted, layer_busy, in_sel, oob_error;
  logic [15:0] n_layers;
  logic [IA_W-1:0] out_blocks;
  logic [31:0] out_nonzeros, n_stall, n_flush_cols;

  accel_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ layers
  typedef struct {
    int wb, hr, cin, cout;           // blocks, frames, channel groups
    int qin, qout, qm, qs, dqm, dqs, ps;
    nl_cfg_t nl;
  } lyr_t;
  lyr_t L [2];

  // reference data
  longint qin_blocks [2][$];         // quantised blocks in storage order, per layer input
  longint wts [2][$];                // weight stream words per layer
  longint fmap [64][32][32];         // decoded input feature map [ch][y][x]
  longint wgt [16][16][3][3];
  longint gam [16], bet [16], alp [16];
  longint ref_out [2][$];            // expected quantised output blocks (64 values each)

  function automatic longint pw(pw_op_e op, longint x, int ch, nl_cfg_t c);
    if (op == PW_BN) return satw(((x * gam[ch]) >>> c.bn_shift) + bet[ch], 16);
    if (op == PW_ACT && x < 0) begin
      case (c.act)
        ACT_RELU:  return 0;
        ACT_LEAKY: return x >>> c.leaky_shift;
        ACT_PRELU: return satw((x * alp[ch]) >>> 8, 16);
        default:   return x;
      endcase
    end
    return x;
  endfunction

  // run the reference for layer n: input blocks in qin_blocks[n]
  task automatic ref_layer(int n);
    lyr_t l = L[n];
    int H = l.hr * 8, W = l.wb * 8, nb = 0;
    int Ho, Wo;
    longint o [16][32][32];
    // decode input
    for (int cg = 0; cg < l.cin; cg++)
      for (int rf = 0; rf < l.hr; rf++)
        for (int bc = 0; bc < l.wb; bc++)
          for (int ch = 0; ch < 4; ch++) begin
            blk_t s, x;
            for (int i = 0; i < 8; i++) for (int r = 0; r < 8; r++)
              s[r][i] = dequant(qin_blocks[n][nb*64 + i*8 + r], l.qin, i, r, l.dqm, l.dqs);
            x = idct2(s);
            for (int y = 0; y < 8; y++) for (int c = 0; c < 8; c++)
              fmap[cg*4 + ch][rf*8 + y][bc*8 + c] = x[y][c];
            nb++;
          end
    // convolution + point-wise ops before pooling
    for (int f = 0; f < l.cout*4; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          longint a = 0;
          for (int ch = 0; ch < l.cin*4; ch++)
            for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
              if (y+i < H && x+j < W) a += fmap[ch][y+i][x+j] * wgt[f][ch][i][j];
          a = longint'(int'(a));
          a = satw(rsh(a, l.ps), 16);
          a = pw(l.nl.pre_op0, a, f, l.nl);
          a = pw(l.nl.pre_op1, a, f, l.nl);
          o[f][y][x] = a;
        end
    Ho = l.nl.pool_en ? H/2 : H;
    Wo = l.nl.pool_en ? W/2 : W;
    for (int f = 0; f < l.cout*4; f++)
      for (int y = 0; y < Ho; y++)
        for (int x = 0; x < Wo; x++) begin
          longint a;
          if (l.nl.pool_en) begin
            longint p0 = o[f][2*y][2*x], p1 = o[f][2*y+1][2*x], p2 = o[f][2*y][2*x+1], p3 = o[f][2*y+1][2*x+1];
            if (l.nl.pool_avg) a = (p0 + p1 + p2 + p3 + 2) >>> 2;
            else begin
              a = p0; if (p1 > a) a = p1; if (p2 > a) a = p2; if (p3 > a) a = p3;
            end
          end else a = o[f][y][x];
          a = pw(l.nl.post_op0, a, f, l.nl);
          a = pw(l.nl.post_op1, a, f, l.nl);
          o[f][y][x] = a;   // in place is safe: (y, x) <= (2y, 2x)
        end
    // compress
    ref_out[n] = {};
    for (int g = 0; g < l.cout; g++)
      for (int rf = 0; rf < Ho/8; rf++)
        for (int bc = 0; bc < Wo/8; bc++)
          for (int ch = 0; ch < 4; ch++) begin
            blk_t x, s;
            for (int y = 0; y < 8; y++) for (int c = 0; c < 8; c++) x[y][c] = o[g*4+ch][rf*8+y][bc*8+c];
            s = dct2(x);
            for (int i = 0; i < 8; i++) for (int r = 0; r < 8; r++)
              ref_out[n].push_back(quant(s[r][i], l.qout, i, r, l.qm, l.qs));
          end
  endtask

  // ------------------------------------------------------------ drivers
  task automatic send_instr(logic [63:0] w);
    cdma_valid <= 1; cdma_data <= w;
    @(posedge clk);
    while (!cdma_ready) @(posedge clk);
    cdma_valid <= 0;
  endtask

  longint wq [$];
  always @(posedge clk) begin : wdma_drv
    int k;
    k = 0;
    if (wdma_valid && wdma_ready) begin
      void'(wq.pop_front());
    end
    if (wq.size() > 0) begin wdma_valid <= 1; wdma_data <= 16'(wq[0]); end
    else wdma_valid <= 0;
  end

  // encode quantised blocks into buffer `buf` with the flip scheme
  task automatic load_input(longint q [$], bit buff);
    int ptr [8] = '{default: 0};
    int nblk = q.size() / 64;
    for (int b = 0; b < nblk; b++) begin
      logic [63:0] idx = '0;
      for (int i = 0; i < 8; i++) begin
        ddma_we <= '0;
        for (int r = 0; r < 8; r++) begin
          longint v = q[b*64 + i*8 + r];
          int p = (b % 2) ? 7 - r : r;
          if (v != 0) begin
            idx[i*8 + r] = 1'b1;
            ddma_we[p] <= 1'b1; ddma_waddr[p] <= FA_W'(ptr[p]); ddma_wdata[p] <= qval_t'(v);
            ptr[p]++;
          end
        end
        ddma_wr_buf <= buff;
        @(posedge clk);
      end
      ddma_we <= '0;
      ddma_idx_we <= 1; ddma_idx_wr_half <= buff; ddma_idx_waddr <= IA_W'(b); ddma_idx_wdata <= idx;
      @(posedge clk);
      ddma_idx_we <= 0;
    end
  endtask

  // read and decode nblk blocks from buffer `buf`
  task automatic read_output(bit buff, int nblk, ref longint q [$]);
    int ptr [8] = '{default: 0};
    q = {};
    for (int b = 0; b < nblk; b++) begin
      logic [63:0] idx;
      ddma_idx_re <= 1; ddma_idx_rd_half <= buff; ddma_idx_raddr <= IA_W'(b);
      @(posedge clk); ddma_idx_re <= 0; @(posedge clk); #0.1;
      idx = ddma_idx_rdata;
      for (int i = 0; i < 8; i++)
        for (int r = 0; r < 8; r++) begin
          longint v = 0;
          if (idx[i*8 + r]) begin
            int p = (b % 2) ? 7 - r : r;
            ddma_re <= '0; ddma_re[p] <= 1; ddma_rd_buf <= buff; ddma_raddr[p] <= FA_W'(ptr[p]);
            @(posedge clk); ddma_re <= '0; @(posedge clk); #0.1;
            v = longint'(ddma_rdata[p]);
            ptr[p]++;
          end
          q.push_back(v);
        end
    end
  endtask

  function automatic logic [63:0] setreg(int r, logic [31:0] v);
    return {4'd1, 4'(r), 24'd0, v};
  endfunction

  // ------------------------------------------------------------ mechanism counters
  int m_prev = 0, m_pend = 0, m_accum = 0, m_pool = 0, m_swap = 0, m_preload = 0, pe_cycles = 0;
  int m_bn = 0, m_act = 0;
  logic last_in_sel = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.pa_valid && dut.pa_tag.prev_ok) m_prev++;
    if (dut.pa_valid && dut.pa_tag.main_ok) m_pend++;
    if (dut.pa_valid && !dut.pa_tag.first) m_accum++;
    if (dut.u_nl.fb_we) m_pool++;
    if (dut.pe_valid) pe_cycles++;
    if (dut.load_req && dut.u_seq.st == dut.u_seq.S_WAIT_W0) m_preload++;
    if (dut.sp_ovalid && dut.sp_oready && (dut.cfg.nl.pre_op0 == PW_BN || dut.cfg.nl.pre_op1 == PW_BN)) m_bn++;
    if (dut.sp_ovalid && dut.sp_oready && dut.cfg.nl.act == ACT_PRELU) m_act++;
    if (in_sel != last_in_sel) m_swap++;
    last_in_sel <= in_sel;
  end

  // ------------------------------------------------------------ main
  initial begin : main
    longint got [$];
    int expected_pe;
    longint stalls = 0;
    for (int p = 0; p < 8; p++) begin ddma_waddr[p] = '0; ddma_raddr[p] = '0; ddma_wdata[p] = '0; end
    // layer parameters
    L[0] = '{wb: 2, hr: 2, cin: 2, cout: 2, qin: 1, qout: 1, qm: 700, qs: 16, dqm: 64, dqs: 4, ps: 4,
             nl: '{pre_op0: PW_BN, pre_op1: PW_NONE, post_op0: PW_ACT, post_op1: PW_NONE,
                   pool_en: 1, pool_avg: 0, act: ACT_RELU, leaky_shift: 0, bn_shift: 5}};
    L[1] = '{wb: 1, hr: 1, cin: 2, cout: 1, qin: 1, qout: 2, qm: 900, qs: 12, dqm: 90, dqs: 6, ps: 5,
             nl: '{pre_op0: PW_ACT, pre_op1: PW_BN, post_op0: PW_NONE, post_op1: PW_NONE,
                   pool_en: 0, pool_avg: 0, act: ACT_PRELU, leaky_shift: 0, bn_shift: 5}};
    // layer 1 input: 2 groups x 2 frames x 2 block columns x 4 channels
    for (int b = 0; b < 32; b++)
      for (int i = 0; i < 8; i++) for (int r = 0; r < 8; r++)
        qin_blocks[0].push_back((i + r < 4) ? longint'($urandom_range(40)) - 20 : 0);
    // weights and BN for both layers (each layer regenerates wgt/gam/bet/alp)
    for (int n = 0; n < 2; n++) begin
      wts[n] = {};
    end

    rst_n = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    load_input(qin_blocks[0], 1'b0);

    for (int n = 0; n < 2; n++) begin
      lyr_t l;
      l = L[n];
      // random weights, per-channel parameters, and their DMA stream
      for (int f = 0; f < l.cout*4; f++) begin
        for (int ch = 0; ch < l.cin*4; ch++) for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
          wgt[f][ch][i][j] = longint'($urandom_range(16)) - 8;
        gam[f] = 16 + $urandom_range(32); bet[f] = longint'($urandom_range(40)) - 20;
        alp[f] = 20 + $urandom_range(100);
      end
      for (int g = 0; g < l.cout; g++) begin
        for (int cg = 0; cg < l.cin; cg++)
          for (int f = 0; f < 4; f++) for (int ch = 0; ch < 4; ch++) for (int k = 0; k < 9; k++)
            wq.push_back(wgt[g*4+f][cg*4+ch][k/3][k%3]);
        for (int ln = 0; ln < 4; ln++) begin
          wq.push_back(gam[g*4+ln]); wq.push_back(bet[g*4+ln]); wq.push_back(alp[g*4+ln]);
        end
      end
      if (n == 1) qin_blocks[1] = ref_out[0];
      ref_layer(n);
      // program: configure and run this layer
      send_instr(setreg(0, 32'(l.wb | (l.hr << 6) | (l.cin << 12) | (l.cout << 18))));
      send_instr(setreg(1, 32'(l.qin | (l.qout << 2) | (l.qs << 4) | (l.dqs << 9) | (l.ps << 14))));
      send_instr(setreg(2, 32'(l.qm | (l.dqm << 16))));
      send_instr(setreg(3, 32'(l.nl)));
      send_instr(setreg(4, (n == 0) ? 32'h0 : 32'h13));   // layer 2: A0, A1 to scratch pad, input B
      send_instr({4'd2, 60'd0});
      send_instr({4'd3, 60'd0});
      @(posedge clk);
      enable <= 1; @(posedge clk); enable <= 0;
      wait (!halted);
      wait (halted && !running);
      repeat (4) @(posedge clk);
      check(n_layers == 16'(n + 1), "layer count");
      expected_pe = l.cout * l.cin * (l.hr + 1) * (l.wb*8 + 2) * 4;
      $display("layer %0d: PE array cycles %0d (expected %0d), blocks %0d, non-zeros %0d of %0d",
               n + 1, pe_cycles, expected_pe, out_blocks, out_nonzeros, out_blocks * 64);
      check(pe_cycles == expected_pe, "PE array cycles = 4 per input column");
      pe_cycles = 0;
      stalls += n_stall;
      check(int'(out_blocks) == ref_out[n].size() / 64, "number of output blocks");
      // read back and compare
      read_output(n == 0 ? 1'b1 : 1'b0, ref_out[n].size() / 64, got);
      for (int k = 0; k < ref_out[n].size(); k++)
        check(got[k] == ref_out[n][k],
              $sformatf("layer %0d block %0d col %0d row %0d: got %0d exp %0d", n + 1, k/64,
                        (k%64)/8, k%8, got[k], ref_out[n][k]));
    end
    check(!oob_error, "no out-of-range buffer access");
    $display("mechanisms: stall=%0d zero-pad=%0d PSUM'=%0d PSUM''=%0d channel-accum=%0d pool=%0d swap=%0d preload=%0d bn=%0d prelu=%0d",
             stalls, n_flush_cols, m_prev, m_pend, m_accum, m_pool, m_swap, m_preload, m_bn, m_act);
    check(n_flush_cols > 0, "zero-padding columns happened");
    check(m_prev > 0 && m_pend > 0, "row-frame overlap (PSUM', PSUM'') happened");
    check(m_accum > 0, "input channel group accumulation happened");
    check(m_pool > 0, "pooling happened");
    check(m_swap == 2, "ping-pong buffer swapped after each layer");
    check(m_preload > 0, "weight preload happened");
    check(m_bn > 0 && m_act > 0, "BN and PReLU happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
