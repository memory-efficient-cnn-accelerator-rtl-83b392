// ofm_path: compression of the output feature map (paper Sec. III-B, IV,
// Fig. 6): four DCT units -> quantiser -> sparse encoder.
//
// Each output column (8 rows x 4 channel lanes from the non-linear module)
// enters the four DCT units (4 x 32 = 128 CCMs) together. Their output
// columns are quantised and queued per lane; the encoder then takes lane
// 0's block, lane 1's, lane 2's and lane 3's, so blocks are stored in the
// same channel-interleaved order the decompression path reads. The DCT
// units take a block every 16 cycles, the encoder 4 blocks in 32 cycles;
// the output of the non-linear module is slower than both.
//
// start resets the encoder (first block at address 0). idle is high when
// every accepted column has been encoded.
module ofm_path
  import accel_pkg::*;
#(
  parameter int FA_W = 15,
  parameter int IA_W = 11
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [1:0]       level,
  input  logic [15:0]      q_mult,
  input  logic [4:0]       q_shift,
  input  logic             in_valid,
  output logic             in_ready,
  input  data_t            in_col [4][8],
  output logic [7:0]       fm_we,
  output logic [FA_W-1:0]  fm_addr [8],
  output qval_t            fm_wdata [8],
  output logic             idx_we,
  output logic [IA_W-1:0]  idx_addr,
  output logic [63:0]      idx_wdata,
  output logic [IA_W-1:0]  blk_count,
  output logic [31:0]      nz_count,
  output logic             idle
);
  logic        d_in_ready [4];
  logic        d_valid [4];
  coef_t       d_col [4][8];
  logic [2:0]  d_idx [4];
  qval_t       q_col [4][8];
  logic        f_in_ready [4];
  logic        f_valid [4];
  logic [63:0] f_data [4];
  logic        all_in_ready, all_d_valid, all_f_ready;
  logic [1:0]  sel;
  logic [2:0]  ecol;
  logic        e_valid;
  qval_t       e_col [8];
  logic [31:0] n_in, n_enc;

  always_comb begin
    all_in_ready = 1'b1; all_d_valid = 1'b1; all_f_ready = 1'b1;
    for (int l = 0; l < 4; l++) begin
      all_in_ready &= d_in_ready[l];
      all_d_valid  &= d_valid[l];
      all_f_ready  &= f_in_ready[l];
    end
  end
  assign in_ready = all_in_ready;

  for (genvar l = 0; l < 4; l++) begin : g_lane
    logic [63:0] pk;
    dct_unit u_dct (
      .clk, .rst_n, .in_valid(in_valid && all_in_ready), .in_ready(d_in_ready[l]),
      .in_col(in_col[l]), .out_valid(d_valid[l]), .out_ready(all_f_ready && all_d_valid),
      .out_col(d_col[l]), .out_idx(d_idx[l]));
    quantizer u_q (.in_col(d_col[l]), .col_idx(d_idx[l]), .level, .q_mult, .q_shift,
                   .out_col(q_col[l]));
    always_comb for (int r = 0; r < 8; r++) pk[r*8 +: 8] = q_col[l][r];
    sync_fifo #(.WIDTH(64), .DEPTH(16)) u_fifo (
      .clk, .rst_n, .clr(start), .in_valid(all_d_valid && all_f_ready), .in_ready(f_in_ready[l]),
      .in_data(pk), .out_valid(f_valid[l]), .out_ready(e_valid && sel == l), .out_data(f_data[l]));
  end

  assign e_valid = f_valid[sel];
  always_comb for (int r = 0; r < 8; r++) e_col[r] = qval_t'(f_data[sel][r*8 +: 8]);

  sparse_encoder #(.FA_W(FA_W), .IA_W(IA_W)) u_enc (
    .clk, .rst_n, .start, .in_valid(e_valid), .in_col(e_col), .fm_we, .fm_addr, .fm_wdata,
    .idx_we, .idx_addr, .idx_wdata, .blk_count, .nz_count);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel <= '0; ecol <= '0; n_in <= '0; n_enc <= '0;
    end else if (start) begin
      sel <= '0; ecol <= '0; n_in <= '0; n_enc <= '0;
    end else begin
      if (in_valid && all_in_ready) n_in <= n_in + 32'd4;
      if (e_valid) begin
        n_enc <= n_enc + 32'd1;
        ecol  <= ecol + 3'd1;
        if (ecol == 3'd7) sel <= sel + 2'd1;
      end
    end
  end
  assign idle = n_in == n_enc;
endmodule
