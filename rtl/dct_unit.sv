// dct_unit: 2-D 8x8 DCT of one channel, Z = C X C^T, column in, column out.
//
// Follows the paper's DCT datapath (Fig. 12): one 32-CCM 1-D transform is
// used twice. In the LOAD phase eight input columns X[:,j] arrive, one per
// accepted cycle; each is transformed (Y[:,j] = C X[:,j]) and written into
// an 8x8 transpose register. In the EMIT phase row i of Y is sent through
// the same 1-D transform, giving row i of Z; it leaves as output "column" i
// of the stored matrix S = Z^T. Storing Z^T lets every later stage (the
// quantiser, the sparse encoder, the IDCT) move one 8x1 column per cycle,
// the bandwidth the paper gives between modules.
//
// Throughput: one block per 16 cycles (8 in, 8 out) when not stalled.
// Handshake: in_valid/in_ready and out_valid/out_ready (a transfer happens
// when both are high). out_idx is the index i of the emitted column.
module dct_unit
  import accel_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  data_t       in_col [8],
  output logic        out_valid,
  input  logic        out_ready,
  output coef_t       out_col [8],
  output logic [2:0]  out_idx
);
  localparam int Y_W = DATA_W + 2;

  logic               emit;      // 0: LOAD, 1: EMIT
  logic [2:0]         cnt;
  logic signed [Y_W-1:0] ybuf [8][8];   // ybuf[row][col]
  logic signed [Y_W-1:0] p1_in  [8];
  logic signed [Y_W-1:0] p1_out [8];
  coef_t              p2_out [8];
  logic signed [Y_W-1:0] yrow [8];

  // Pass 1 (columns) and pass 2 (rows) share the CCM array: the input of
  // the single 1-D transform is multiplexed by phase.
  always_comb begin
    for (int r = 0; r < 8; r++) yrow[r] = ybuf[cnt][r];
    for (int r = 0; r < 8; r++) p1_in[r] = emit ? yrow[r] : Y_W'(in_col[r]);
  end

  dct_1d #(.IN_W(Y_W), .OUT_W(Z_W)) u_ccm (.x(p1_in), .y(p2_out));
  always_comb for (int r = 0; r < 8; r++) p1_out[r] = Y_W'(p2_out[r]);

  assign in_ready  = !emit;
  assign out_valid = emit;
  assign out_col   = p2_out;
  assign out_idx   = cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      emit <= 1'b0;
      cnt  <= '0;
    end else if (!emit && in_valid) begin
      for (int r = 0; r < 8; r++) ybuf[r][cnt] <= p1_out[r];
      cnt <= cnt + 3'd1;
      if (cnt == 3'd7) emit <= 1'b1;
    end else if (emit && out_ready) begin
      cnt <= cnt + 3'd1;
      if (cnt == 3'd7) emit <= 1'b0;
    end
  end
endmodule
