// weight_decoder: weight FIFO and double-buffered local weight buffer of
// the PE array (paper Sec. IV and V-A).
//
// Words arrive from the weight DMA into a FIFO that hides the DMA latency.
// On load_req the loader pops words into the shadow copy: 144 weights for
// one (output group, input group) pair of a 3x3 layer, in the order
// filter f (0..3), channel c (0..3), tap k = 3*i + j (0..8); or, with
// load_bn, 12 per-channel words: gamma, beta, alpha for lanes 0..3.
// swap_w / swap_bn copy the shadow into the active copy used by the PE
// array and the non-linear module, so the next weights are preloaded while
// the current ones are in use. load_done is high while no load is pending.
// The paper names a weight decoder but not its coding; weights arrive here
// as plain 16-bit words.
module weight_decoder
  import accel_pkg::*;
#(
  parameter int FIFO_DEPTH = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wdma_valid,
  output logic       wdma_ready,
  input  logic [15:0] wdma_data,
  input  logic       load_req,
  input  logic       load_bn,
  output logic       load_done,
  input  logic       swap_w,
  input  logic       swap_bn,
  output data_t      w_act [4][4][9],   // [filter][channel][tap]
  output bn_par_t    bn_act [4]
);
  logic        f_valid, f_ready;
  logic [15:0] f_data;
  logic        busy, is_bn;
  logic [7:0]  cnt;
  data_t       w_sh [144];
  logic [15:0] bn_sh [12];

  sync_fifo #(.WIDTH(16), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clr(1'b0), .in_valid(wdma_valid), .in_ready(wdma_ready), .in_data(wdma_data),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data));

  assign f_ready   = busy;
  assign load_done = !busy && !load_req;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; is_bn <= 1'b0; cnt <= '0;
    end else if (load_req) begin
      busy <= 1'b1; is_bn <= load_bn; cnt <= '0;
    end else if (busy && f_valid) begin
      cnt <= cnt + 8'd1;
      if (is_bn ? cnt == 8'd11 : cnt == 8'd143) busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (busy && f_valid) begin
      if (is_bn) bn_sh[cnt[3:0]] <= f_data;
      else       w_sh[cnt]       <= data_t'(f_data);
    end
    if (swap_w)
      for (int f = 0; f < 4; f++) for (int c = 0; c < 4; c++) for (int k = 0; k < 9; k++)
        w_act[f][c][k] <= w_sh[f*36 + c*9 + k];
    if (swap_bn)
      for (int l = 0; l < 4; l++) bn_act[l] <= {bn_sh[3*l], bn_sh[3*l+1], bn_sh[3*l+2]};
  end
endmodule
