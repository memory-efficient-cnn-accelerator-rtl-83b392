// sparse_encoder: index-matrix sparse coding of quantised 8x8 matrices
// with the alternating flip storage of the paper's Fig. 5.
//
// The feature map buffer is 8 SRAM pieces, one per matrix row. Each input
// column (one per cycle, columns 0..7 of a block in order) writes each
// non-zero value into the piece of its row at that piece's own write
// pointer, so a piece fills up with its row's non-zeros in column order.
// Zeros are not stored; a 1-bit flag per position goes into the 64-bit
// index matrix, written to the index buffer at the end of the block.
// Even-numbered matrices use piece r for row r; odd-numbered matrices are
// flipped and use piece 7-r, so the long (low-frequency) row of one block
// shares a piece with the short row of the next and the pieces fill evenly.
//
// Index bit layout (this design's choice): bit 8*i + r is the flag of row
// r in column i. start resets the pointers and the block count; the first
// block is stored at address 0 of every piece and of the index buffer.
// Always ready; write ports are driven in the same cycle as the input.
module sparse_encoder
  import accel_pkg::*;
#(
  parameter int FA_W = 15,   // piece address width
  parameter int IA_W = 11    // index buffer address width
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             in_valid,
  input  qval_t            in_col [8],
  output logic [7:0]       fm_we,
  output logic [FA_W-1:0]  fm_addr [8],
  output qval_t            fm_wdata [8],
  output logic             idx_we,
  output logic [IA_W-1:0]  idx_addr,
  output logic [63:0]      idx_wdata,
  output logic [IA_W-1:0]  blk_count,
  output logic [31:0]      nz_count
);
  logic [FA_W-1:0] ptr [8];
  logic [2:0]      col;
  logic            odd;
  logic [55:0]     idx_acc;
  logic [7:0]      nz;
  logic [3:0]      n_nz;

  always_comb begin
    fm_we = '0;
    n_nz  = '0;
    for (int p = 0; p < 8; p++) begin
      fm_addr[p]  = ptr[p];
      fm_wdata[p] = '0;
    end
    for (int r = 0; r < 8; r++) begin
      nz[r] = in_col[r] != 0;
      n_nz  = n_nz + 4'(nz[r]);
      if (in_valid && nz[r]) begin
        fm_we[odd ? 7 - r : r]    = 1'b1;
        fm_wdata[odd ? 7 - r : r] = in_col[r];
      end
    end
    idx_we    = in_valid && col == 3'd7;
    idx_addr  = blk_count;
    idx_wdata = {nz, idx_acc};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < 8; p++) ptr[p] <= '0;
      col <= '0; odd <= 1'b0; idx_acc <= '0; blk_count <= '0; nz_count <= '0;
    end else if (start) begin
      for (int p = 0; p < 8; p++) ptr[p] <= '0;
      col <= '0; odd <= 1'b0; idx_acc <= '0; blk_count <= '0; nz_count <= '0;
    end else if (in_valid) begin
      for (int p = 0; p < 8; p++)
        if (fm_we[p]) ptr[p] <= ptr[p] + 1'b1;
      nz_count <= nz_count + 32'(n_nz);
      col <= col + 3'd1;
      if (col != 3'd7) idx_acc[col*8 +: 8] <= nz;
      else begin
        idx_acc   <= '0;
        odd       <= !odd;
        blk_count <= blk_count + 1'b1;
      end
    end
  end
endmodule
