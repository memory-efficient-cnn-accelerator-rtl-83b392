// sparse_decoder: reads quantised 8x8 matrices back from the feature map
// buffer, one column per cycle, the inverse of sparse_encoder.
//
// After start it reads the index matrix of block 0, then for every column
// enables only the pieces whose index bit is set (chip select), at each
// piece's own read pointer, and fills the other rows with zeros. Odd
// blocks are un-flipped (row r comes from piece 7-r). The index of the next
// block is read while the last column of the current one is issued, so a
// column leaves every cycle while the consumer is ready.
//
// Timing: memories have one cycle of read latency; out_col is built from
// the piece read data and is valid the cycle after the read. When the
// consumer stalls no new read is issued, so the read data (and out_col)
// hold. out_idx is the column number within the block.
module sparse_decoder
  import accel_pkg::*;
#(
  parameter int FA_W = 15,
  parameter int IA_W = 11
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             idx_re,
  output logic [IA_W-1:0]  idx_addr,
  input  logic [63:0]      idx_rdata,
  output logic [7:0]       fm_re,
  output logic [FA_W-1:0]  fm_addr [8],
  input  qval_t            fm_rdata [8],
  output logic             out_valid,
  input  logic             out_ready,
  output qval_t            out_col [8],
  output logic [2:0]       out_idx
);
  logic [FA_W-1:0] ptr [8];
  logic [IA_W-1:0] blk;
  logic [2:0]      col;
  logic            odd;
  logic            running;
  logic            idx_pend;     // index read data arrives this cycle
  logic [63:0]     idx_cur;
  logic [63:0]     idx_eff;
  logic [7:0]      mask_q;
  logic            flip_q;
  logic            issue;
  logic [7:0]      bits;

  always_comb begin
    idx_eff = idx_pend ? idx_rdata : idx_cur;
    bits    = idx_eff[col*8 +: 8];
    issue   = running && (!out_valid || out_ready);
    fm_re   = '0;
    for (int p = 0; p < 8; p++) fm_addr[p] = ptr[p];
    for (int r = 0; r < 8; r++)
      if (issue && bits[r]) fm_re[odd ? 7 - r : r] = 1'b1;
    idx_re   = start || (issue && col == 3'd7);
    idx_addr = start ? '0 : blk + 1'b1;
    for (int r = 0; r < 8; r++)
      out_col[r] = mask_q[r] ? fm_rdata[flip_q ? 7 - r : r] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < 8; p++) ptr[p] <= '0;
      blk <= '0; col <= '0; odd <= 1'b0; running <= 1'b0; idx_pend <= 1'b0;
      idx_cur <= '0; mask_q <= '0; flip_q <= 1'b0; out_valid <= 1'b0; out_idx <= '0;
    end else if (start) begin
      for (int p = 0; p < 8; p++) ptr[p] <= '0;
      blk <= '0; col <= '0; odd <= 1'b0; running <= 1'b1; idx_pend <= 1'b1;
      out_valid <= 1'b0;
    end else begin
      idx_pend <= 1'b0;
      if (idx_pend) idx_cur <= idx_rdata;
      if (issue) begin
        for (int p = 0; p < 8; p++)
          if (fm_re[p]) ptr[p] <= ptr[p] + 1'b1;
        mask_q    <= bits;
        flip_q    <= odd;
        out_idx   <= col;
        out_valid <= 1'b1;
        col       <= col + 3'd1;
        if (col == 3'd7) begin
          blk      <= blk + 1'b1;
          odd      <= !odd;
          idx_pend <= 1'b1;
        end
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end
endmodule
