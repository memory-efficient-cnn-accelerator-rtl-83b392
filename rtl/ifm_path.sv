// ifm_path: decompression of the input feature map (paper Sec. III-C, IV,
// Fig. 6 and 7): sparse decoder -> inverse quantiser -> four IDCT units.
//
// Compressed blocks are stored channel-interleaved: for each input channel
// group, row frame and block column, the blocks of the group's 4 channels
// in order. The decoder produces one column per cycle; block n goes to
// IDCT unit n mod 4, so the four units (4 x 32 = 128 CCMs) work on the 4
// channels of one block column. Each unit's output columns go into a
// FIFO; a column of all 4 channels (8 rows x 4 channels, the PE array's
// input) is valid when all four FIFOs hold one. With the PE array taking
// a column every 4 cycles (3x3 mode) and 4 blocks taking 32 decoder
// cycles, decompression keeps pace with the convolution.
//
// start restarts the decoder at the beginning of the input buffer.
module ifm_path
  import accel_pkg::*;
#(
  parameter int FA_W = 15,
  parameter int IA_W = 11
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [1:0]       level,
  input  logic [15:0]      dq_mult,
  input  logic [4:0]       dq_shift,
  // buffer bank read side
  output logic             idx_re,
  output logic [IA_W-1:0]  idx_addr,
  input  logic [63:0]      idx_rdata,
  output logic [7:0]       fm_re,
  output logic [FA_W-1:0]  fm_addr [8],
  input  qval_t            fm_rdata [8],
  // decompressed columns to the PE array
  output logic             col_valid,
  input  logic             col_ready,
  output data_t            col [4][8]
);
  logic        d_valid, d_ready;
  qval_t       d_col [8];
  logic [2:0]  d_idx;
  coef_t       dq_col [8];
  logic [1:0]  lane;
  logic        i_ready [4];
  logic        o_valid [4];
  data_t       o_col [4][8];
  logic        f_in_ready [4];
  logic        f_valid [4];
  logic [127:0] f_data [4];
  logic        all_valid;

  sparse_decoder #(.FA_W(FA_W), .IA_W(IA_W)) u_dec (
    .clk, .rst_n, .start, .idx_re, .idx_addr, .idx_rdata, .fm_re, .fm_addr, .fm_rdata,
    .out_valid(d_valid), .out_ready(d_ready), .out_col(d_col), .out_idx(d_idx));

  dequantizer u_dq (.in_col(d_col), .col_idx(d_idx), .level, .dq_mult, .dq_shift, .out_col(dq_col));

  assign d_ready = i_ready[lane];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)     lane <= '0;
    else if (start) lane <= '0;
    else if (d_valid && d_ready && d_idx == 3'd7) lane <= lane + 2'd1;

  always_comb begin
    all_valid = 1'b1;
    for (int l = 0; l < 4; l++) all_valid &= f_valid[l];
  end
  assign col_valid = all_valid;

  for (genvar l = 0; l < 4; l++) begin : g_lane
    logic [127:0] pk;
    idct_unit u_idct (
      .clk, .rst_n, .clr(start), .in_valid(d_valid && lane == l), .in_ready(i_ready[l]), .in_col(dq_col),
      .out_valid(o_valid[l]), .out_ready(f_in_ready[l]), .out_col(o_col[l]));
    always_comb for (int r = 0; r < 8; r++) pk[r*16 +: 16] = o_col[l][r];
    sync_fifo #(.WIDTH(128), .DEPTH(16)) u_fifo (
      .clk, .rst_n, .clr(start), .in_valid(o_valid[l]), .in_ready(f_in_ready[l]), .in_data(pk),
      .out_valid(f_valid[l]), .out_ready(col_ready && all_valid), .out_data(f_data[l]));
    always_comb for (int r = 0; r < 8; r++) col[l][r] = data_t'(f_data[l][r*16 +: 16]);
  end
endmodule
