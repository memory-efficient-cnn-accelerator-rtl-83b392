// nonlinear: the non-linear module (paper Sec. V-C, Fig. 11, Table I).
//
// Takes one column of channel-summed partial sums (8 rows x 4 output
// channel lanes) from the scratch pad and returns one column of 16-bit
// features for the DCT. Steps:
//   1. requantise: x = sat16(round(psum / 2^psum_shift)) (dynamic fixed
//      point; the shift is set per layer);
//   2. up to two point-wise ops before pooling (pre_op0, pre_op1);
//   3. optional 2x2, stride-2 max or average pooling;
//   4. up to two point-wise ops after pooling (post_op0, post_op1).
// Point-wise ops are BN, y = sat16((x * gamma) >>> bn_shift + beta), and
// the activation: ReLU, leaky ReLU (slope 2^-leaky_shift) or parametric
// ReLU (per-channel slope alpha with 8 fraction bits). Splitting the
// sequence around the pooling step gives every order of BN, activation
// and pooling, which is how the configurable order of the paper is
// realised here; formats and slopes are this design's choice.
//
// Pooling: the input arrives frame by frame, column by column (in_c,
// in_rf_odd). Vertical row pairs are combined in a column and two columns
// make one pooled column of 4 values. In even frames those 4 values are
// kept in a frame buffer (one entry per pooled column); in odd frames the
// stored 4 values and the new 4 form an 8-row output column. So a pooled
// map of whole 8-row frames leaves, one column per two input columns of
// every second frame.
//
// Handshake: in_ready = !out_valid || out_ready; one register stage.
module nonlinear
  import accel_pkg::*;
#(
  parameter int MAX_W = 256
) (
  input  logic       clk,
  input  logic       rst_n,
  input  nl_cfg_t    cfg,
  input  logic [4:0] psum_shift,
  input  bn_par_t    bn [4],
  input  logic       in_valid,
  output logic       in_ready,
  input  psum_t      in_col [4][8],
  input  logic [8:0] in_c,
  input  logic       in_rf_odd,
  output logic       out_valid,
  input  logic       out_ready,
  output data_t      out_col [4][8]
);
  localparam int PA_W = $clog2(MAX_W / 2);

  function automatic data_t pw_op(pw_op_e op, data_t x, bn_par_t p, nl_cfg_t c);
    logic signed [47:0] t;
    case (op)
      PW_BN: begin
        t = (48'(x) * 48'(p.gamma)) >>> c.bn_shift;
        return data_t'(sat(t + 48'(p.beta), DATA_W));
      end
      PW_ACT: begin
        if (x >= 0) return x;
        case (c.act)
          ACT_RELU:  return '0;
          ACT_LEAKY: return x >>> c.leaky_shift;
          ACT_PRELU: return data_t'(sat((48'(x) * 48'(p.alpha)) >>> 8, DATA_W));
          default:   return x;
        endcase
      end
      default: return x;
    endcase
  endfunction

  data_t               pre [4][8];
  data_t               vp  [4][4];     // vertical pair result (max) of this column
  logic signed [17:0]  vs  [4][4];     // vertical pair sum (average)
  data_t               vp_q [4][4];
  logic signed [17:0]  vs_q [4][4];
  data_t               pooled [4][4];
  data_t               post [4][8];
  logic                accept, emit;
  logic [255:0]        fb_rdata, fb_wdata;
  logic                fb_we, fb_re;

  always_comb begin
    accept = in_valid && in_ready;
    for (int l = 0; l < 4; l++) begin
      for (int r = 0; r < 8; r++) begin
        logic signed [47:0] t;
        t = 48'(in_col[l][r]);
        if (psum_shift != 0) t = (t + (48'sd1 <<< (psum_shift - 1))) >>> psum_shift;
        pre[l][r] = data_t'(sat(t, DATA_W));
        pre[l][r] = pw_op(cfg.pre_op0, pre[l][r], bn[l], cfg);
        pre[l][r] = pw_op(cfg.pre_op1, pre[l][r], bn[l], cfg);
      end
      for (int i = 0; i < 4; i++) begin
        vp[l][i] = (pre[l][2*i] > pre[l][2*i+1]) ? pre[l][2*i] : pre[l][2*i+1];
        vs[l][i] = 18'(pre[l][2*i]) + 18'(pre[l][2*i+1]);
        if (cfg.pool_avg) pooled[l][i] = data_t'((vs_q[l][i] + vs[l][i] + 18'sd2) >>> 2);
        else              pooled[l][i] = (vp_q[l][i] > vp[l][i]) ? vp_q[l][i] : vp[l][i];
        fb_wdata[(l*4 + i)*16 +: 16] = pooled[l][i];
      end
      for (int r = 0; r < 8; r++) begin
        if (!cfg.pool_en) post[l][r] = pre[l][r];
        else if (r < 4)   post[l][r] = data_t'(fb_rdata[(l*4 + r)*16 +: 16]);
        else              post[l][r] = pooled[l][r-4];
        post[l][r] = pw_op(cfg.post_op0, post[l][r], bn[l], cfg);
        post[l][r] = pw_op(cfg.post_op1, post[l][r], bn[l], cfg);
      end
    end
    emit  = accept && (!cfg.pool_en || (in_c[0] && in_rf_odd));
    fb_we = accept && cfg.pool_en && in_c[0] && !in_rf_odd;
    fb_re = accept && cfg.pool_en && !in_c[0] && in_rf_odd;
  end
  assign in_ready = !out_valid || out_ready;

  sram_1r1w #(.DEPTH(MAX_W / 2), .WIDTH(256)) u_fb (
    .clk, .we(fb_we), .wlane(1'b1), .waddr(PA_W'(in_c >> 1)), .wdata(fb_wdata),
    .re(fb_re), .raddr(PA_W'(in_c >> 1)), .rdata(fb_rdata));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int l = 0; l < 4; l++) begin
        for (int r = 0; r < 8; r++) out_col[l][r] <= '0;
        for (int i = 0; i < 4; i++) begin vp_q[l][i] <= '0; vs_q[l][i] <= '0; end
      end
    end else begin
      if (accept && !in_c[0]) begin
        vp_q <= vp;
        vs_q <= vs;
      end
      if (emit) begin
        out_valid <= 1'b1;
        out_col   <= post;
      end else if (out_ready) out_valid <= 1'b0;
    end
  end
endmodule
