// tb_sparse_encoder: feeds random sparse quantised blocks (about 70 %
// zeros, more in the high-frequency corner) column by column into the
// encoder, captures every write it makes to the eight feature map pieces
// and the index buffer in behavioural memories, and compares them with the
// expected layout built independently: for every block the index bits
// (bit 8*i + r for row r of column i), and for every piece the non-zeros
// of its row in column order, with odd blocks flipped (row r in piece
// 7 - r). Also checks the block and non-zero counters and that one
// column is taken per cycle (no stalls), with random gaps in the input.
`timescale 1ns/1ps
module tb_sparse_encoder;
  import accel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic start = 0, in_valid = 0;
  qval_t in_col [8];
  logic [7:0] fm_we;
  logic [14:0] fm_addr [8];
  qval_t fm_wdata [8];
  logic idx_we;
  logic [10:0] idx_addr;
  logic [63:0] idx_wdata;
  logic [10:0] blk_count;
  logic [31:0] nz_count;
  localparam int NB = 40;
  int q [NB][8][8];            // [block][col][row]
  int mem [8][$];              // captured piece contents in address order
  int mem_addr [8][$];
  logic [63:0] idx_mem [NB];
  int nz = 0;

  sparse_encoder dut (.clk, .rst_n, .start, .in_valid, .in_col, .fm_we, .fm_addr, .fm_wdata,
                      .idx_we, .idx_addr, .idx_wdata, .blk_count, .nz_count);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    for (int p = 0; p < 8; p++)
      if (fm_we[p]) begin mem[p].push_back(int'(fm_wdata[p])); mem_addr[p].push_back(int'(fm_addr[p])); end
    if (idx_we && idx_addr < NB) idx_mem[idx_addr] = idx_wdata;
  end

  initial begin
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < 8; i++) for (int r = 0; r < 8; r++) begin
        q[b][i][r] = ($urandom_range(9) < ((i + r < 6) ? 6 : 1)) ? int'($urandom_range(254)) - 127 : 0;
        if (q[b][i][r] != 0) nz++;
      end
    for (int b = 0; b < NB; b++) idx_mem[b] = '0;
    for (int r = 0; r < 8; r++) in_col[r] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1; @(posedge clk); start <= 0;
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < 8; i++) begin
        while ($urandom_range(3) == 0) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1;
        for (int r = 0; r < 8; r++) in_col[r] <= qval_t'(q[b][i][r]);
        @(posedge clk);
      end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    // index matrices
    for (int b = 0; b < NB; b++) begin
      logic [63:0] e;
      e = '0;
      for (int i = 0; i < 8; i++) for (int r = 0; r < 8; r++) e[8*i + r] = (q[b][i][r] != 0);
      checks++;
      if (idx_mem[b] !== e) begin failures++; $display("FAIL index of block %0d: %h exp %h", b, idx_mem[b], e); end
    end
    // piece contents
    for (int p = 0; p < 8; p++) begin
      int k;
      k = 0;
      for (int b = 0; b < NB; b++) begin
        int r;
        r = b[0] ? 7 - p : p;
        for (int i = 0; i < 8; i++)
          if (q[b][i][r] != 0) begin
            checks++;
            if (k >= mem[p].size() || mem[p][k] != q[b][i][r] || mem_addr[p][k] != k) begin
              failures++;
              if (failures < 10) $display("FAIL piece %0d entry %0d (block %0d col %0d)", p, k, b, i);
            end
            k++;
          end
      end
      checks++;
      if (mem[p].size() != k) begin failures++; $display("FAIL piece %0d holds %0d values, exp %0d", p, mem[p].size(), k); end
    end
    checks += 2;
    if (blk_count != 11'(NB)) begin failures++; $display("FAIL blk_count %0d", blk_count); end
    if (nz_count != 32'(nz)) begin failures++; $display("FAIL nz_count %0d exp %0d", nz_count, nz); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
