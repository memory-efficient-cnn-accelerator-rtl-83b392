// pe_array: the 288-PE array, paper Sec. V-B and Fig. 8.
//
// Four PE groups, one per input channel; each group has a data MUX and 8
// PE units (one per row of the 8-row frame), 4 x 8 x 9 = 288 PEs. The
// partial sum adder then adds the four channels' results so that only
// channel-summed partial sums go to the scratch pad.
//
// 3x3 mode output (psum index): 0..5 = PSUM0..PSUM5 (rows 0..5 of the
// current frame, from units 1..6), 6, 7 = PSUM'6, PSUM'7 (rows 6, 7 of the
// previous frame, unit 0), 8, 9 = PSUM''6, PSUM''7 (rows 6, 7 of the
// current frame, unit 7). 1x1 mode: psum[8*row + k] is row `row` of
// filter k (8 filters in parallel).
//
// Inputs per cycle: one column of 8 rows for each of 4 channels and the
// weights of the filter(s) used in this cycle for each channel, w[ch][9].
// A TAG_W-bit tag travels with the data. Latency 2 cycles (PE units, then
// the partial sum adder); a new input can be accepted every cycle.
module pe_array
  import accel_pkg::*;
#(
  parameter int TAG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             mode1x1,
  input  logic             in_valid,
  input  logic             shift,
  input  logic [TAG_W-1:0] in_tag,
  input  data_t            col [4][8],
  input  data_t            w [4][9],
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output psum_t            psum [64]
);
  psum_t            uout [4][8][8];   // [channel][unit][output]
  logic             uval [4][8];
  logic             v1;
  logic             m1;
  logic [TAG_W-1:0] tag1;
  psum_t            acc [64];

  for (genvar c = 0; c < 4; c++) begin : g_grp
    for (genvar u = 0; u < 8; u++) begin : g_unit
      data_t d [3];
      data_t pw [3][3];
      logic  gb [3];
      pe_data_mux #(.U(u)) u_mux (
        .mode1x1, .rows(col[c]), .w(w[c]), .d(d), .pw(pw), .grp_b(gb));
      pe_unit u_pe (
        .clk, .rst_n, .mode1x1, .in_valid, .shift, .d(d), .pw(pw), .grp_b(gb),
        .out_valid(uval[c][u]), .out(uout[c][u]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; tag1 <= '0; m1 <= 1'b0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        tag1 <= in_tag;
        m1   <= mode1x1;
      end
    end
  end

  // partial sum adder across the four channels
  always_comb begin
    for (int i = 0; i < 64; i++) acc[i] = '0;
    for (int c = 0; c < 4; c++) begin
      if (m1) begin
        for (int u = 0; u < 8; u++)
          for (int k = 0; k < 8; k++) acc[8*u + k] += uout[c][u][k];
      end else begin
        for (int u = 1; u < 7; u++) acc[u-1] += uout[c][u][0];
        acc[6] += uout[c][0][0];
        acc[7] += uout[c][0][1];
        acc[8] += uout[c][7][0];
        acc[9] += uout[c][7][1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_tag <= '0;
      for (int i = 0; i < 64; i++) psum[i] <= '0;
    end else begin
      out_valid <= v1;
      if (v1) begin
        out_tag <= tag1;
        psum    <= acc;
      end
    end
  end

endmodule
