// tb_sparse_decoder: fills behavioural models of the eight feature map
// pieces and the index buffer (one cycle of read latency, like the SRAMs)
// with random sparse blocks in the flip storage layout, runs the decoder
// with random back-pressure, and checks every output column: zeros where
// the index bit is clear, the stored value un-flipped where it is set,
// and out_idx. Then checks that with the consumer always ready one column
// leaves per cycle, also across block boundaries (the next index is read
// ahead), and that start restarts from block 0.
`timescale 1ns/1ps
module tb_sparse_decoder;
  import accel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic start = 0;
  logic idx_re;
  logic [10:0] idx_addr;
  logic [63:0] idx_rdata;
  logic [7:0] fm_re;
  logic [14:0] fm_addr [8];
  qval_t fm_rdata [8];
  logic out_valid, out_ready = 0;
  qval_t out_col [8];
  logic [2:0] out_idx;
  localparam int NB = 40;
  int q [NB][8][8];
  qval_t pmem [8][2048];
  logic [63:0] imem [NB + 2];
  int nout = 0, run = 0, t_first = 0, t_last = 0, cyc = 0;
  bit fast = 0, armed = 0;

  sparse_decoder dut (.clk, .rst_n, .start, .idx_re, .idx_addr, .idx_rdata, .fm_re, .fm_addr,
                      .fm_rdata, .out_valid, .out_ready, .out_col, .out_idx);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory models
  always @(posedge clk) begin
    if (idx_re) idx_rdata <= (idx_addr < NB + 2) ? imem[idx_addr] : '0;
    for (int p = 0; p < 8; p++) if (fm_re[p]) fm_rdata[p] <= pmem[p][fm_addr[p]];
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    out_ready <= fast ? 1'b1 : 1'($urandom_range(1));
    if (start) armed <= 1;
    if (rst_n && armed && out_valid && out_ready && nout < NB * 8) begin
      int b, i;
      b = nout / 8; i = nout % 8;
      checks++;
      if (out_idx != 3'(i)) begin failures++; $display("FAIL out_idx"); end
      for (int r = 0; r < 8; r++) begin
        checks++;
        if (int'(out_col[r]) != q[b][i][r]) begin
          failures++;
          if (failures < 10) $display("FAIL blk %0d col %0d row %0d got %0d exp %0d", b, i, r, out_col[r], q[b][i][r]);
        end
      end
      if (nout == 0) t_first = cyc;
      t_last = cyc;
      nout++;
    end
  end

  initial begin
    int ptr [8];
    for (int p = 0; p < 8; p++) ptr[p] = 0;
    for (int b = 0; b < NB + 2; b++) imem[b] = '0;
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < 8; i++) for (int r = 0; r < 8; r++) begin
        int p;
        q[b][i][r] = ($urandom_range(9) < ((i + r < 6) ? 6 : 1)) ? int'($urandom_range(254)) - 127 : 0;
        if (b == 1 && i == 0) q[b][i][r] = 0;               // an all-zero column
        if (q[b][i][r] != 0) begin
          p = b[0] ? 7 - r : r;
          pmem[p][ptr[p]] = qval_t'(q[b][i][r]);
          ptr[p]++;
          imem[b][8*i + r] = 1'b1;
        end
      end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int pass = 0; pass < 2; pass++) begin
      fast = (pass == 1);
      nout = 0;
      @(posedge clk);
      start <= 1; @(posedge clk); start <= 0;
      wait (nout == NB * 8);
      armed <= 0;
      @(posedge clk);
    end
    checks++;
    if (t_last - t_first != NB * 8 - 1) begin
      failures++;
      $display("FAIL rate: %0d cycles for %0d columns", t_last - t_first + 1, NB * 8);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
