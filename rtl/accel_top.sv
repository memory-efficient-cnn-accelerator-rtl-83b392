// accel_top: CNN accelerator with interlayer feature map compression.
//
// Block structure of the paper's Fig. 6. Instructions arrive over the
// instruction DMA stream into the instruction queue and are executed by
// the top-level control unit; a CONV instruction runs one fusion layer:
//   buffer bank (compressed input) -> sparse decoder -> inverse quantiser
//   -> 4 IDCT units -> 288-PE array -> scratch pad accumulation ->
//   non-linear module -> 4 DCT units -> quantiser -> sparse encoder ->
//   buffer bank (compressed output, the other ping-pong buffer).
// Weights and BN parameters stream in over the weight DMA port into the
// weight decoder. The DMA controller itself is outside this module: its
// feature map side is the ddma_* port, which owns the buffer bank while no
// layer runs (to load the first compressed input and fetch results).
//
// Supported here: 3x3 convolution, stride 1, with the paper's row-frame
// partial-sum scheme, BN / ReLU variants / 2x2 pooling in any order, and
// DCT compression of every layer. The PE array also has the 1x1 mode, but
// the layer sequencer only issues 3x3 layers.
module accel_top
  import accel_pkg::*;
#(
  parameter int FMB_KB    = 128,
  parameter int CM_SUB_KB = 32,
  parameter int SP_KB     = 64,
  parameter int IDX_KB    = 32,
  parameter int MAX_W     = 256,
  parameter int IQ_DEPTH  = 64,
  localparam int FMB_DEPTH = FMB_KB * 1024 / 8,
  localparam int CM_WORDS  = CM_SUB_KB * 1024 / 8 / 16,
  localparam int FA_W  = $clog2(FMB_DEPTH + 2 * CM_WORDS * 16),
  localparam int SPA_W = $clog2(SP_KB * 1024 / 8 / 16 + 4 * CM_WORDS),
  localparam int IA_W  = $clog2(IDX_KB * 1024 / 2 / 8)
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction DMA
  input  logic              cdma_valid,
  output logic              cdma_ready,
  input  logic [63:0]       cdma_data,
  input  logic              enable,
  // weight DMA
  input  logic              wdma_valid,
  output logic              wdma_ready,
  input  logic [15:0]       wdma_data,
  // feature map DMA (used while no layer runs)
  input  logic              ddma_wr_buf,
  input  logic [7:0]        ddma_we,
  input  logic [FA_W-1:0]   ddma_waddr [8],
  input  qval_t             ddma_wdata [8],
  input  logic              ddma_rd_buf,
  input  logic [7:0]        ddma_re,
  input  logic [FA_W-1:0]   ddma_raddr [8],
  output qval_t             ddma_rdata [8],
  input  logic              ddma_idx_wr_half,
  input  logic              ddma_idx_we,
  input  logic [IA_W-1:0]   ddma_idx_waddr,
  input  logic [63:0]       ddma_idx_wdata,
  input  logic              ddma_idx_rd_half,
  input  logic              ddma_idx_re,
  input  logic [IA_W-1:0]   ddma_idx_raddr,
  output logic [63:0]       ddma_idx_rdata,
  // status
  output logic              running,
  output logic              halted,
  output logic              layer_busy,
  output logic              in_sel,
  output logic [15:0]       n_layers,
  output logic [IA_W-1:0]   out_blocks,
  output logic [31:0]       out_nonzeros,
  output logic [31:0]       n_stall,
  output logic [31:0]       n_flush_cols,
  output logic              oob_error
);
  // ------------------------------------------------------------ control
  logic        i_valid, i_ready;
  logic [63:0] i_word;
  layer_cfg_t  cfg;
  logic [3:0]  cm_sp;
  logic        l_start, l_done, l_busy;

  instr_queue #(.DEPTH(IQ_DEPTH)) u_iq (
    .clk, .rst_n, .cdma_valid, .cdma_ready, .cdma_data, .enable, .running,
    .instr_valid(i_valid), .instr_ready(i_ready), .instr(i_word));

  top_ctrl u_ctrl (
    .clk, .rst_n, .instr_valid(i_valid), .instr_ready(i_ready), .instr(i_word), .cfg, .cm_sp,
    .in_sel, .layer_start(l_start), .layer_done(l_done), .layer_busy, .halted, .n_layers);

  logic    load_req, load_bn, load_done, swap_w, swap_bn;
  logic    ifm_start, col_valid, col_pop, pe_valid, pe_shift, pe_zero;
  pe_tag_t pe_tag;
  logic    rd_valid, rd_ready;
  logic [5:0] rd_rf;
  logic [8:0] rd_col;
  logic    ofm_start, out_idle;

  layer_ctrl u_seq (
    .clk, .rst_n, .start(l_start), .cfg, .busy(l_busy), .done(l_done),
    .load_req, .load_bn, .load_done, .swap_w, .swap_bn,
    .ifm_start, .col_valid, .col_pop, .pe_valid, .pe_shift, .pe_zero, .pe_tag,
    .rd_valid, .rd_ready, .rd_rf, .rd_col, .ofm_start, .out_idle, .n_stall, .n_flush_cols);

  // ------------------------------------------------------------ weights
  data_t   w_act [4][4][9];
  bn_par_t bn_act [4];
  weight_decoder u_wdec (
    .clk, .rst_n, .wdma_valid, .wdma_ready, .wdma_data, .load_req, .load_bn, .load_done,
    .swap_w, .swap_bn, .w_act, .bn_act);

  // ------------------------------------------------------------ buffer bank
  logic [7:0]       e_we, d_re;
  logic [FA_W-1:0]  e_addr [8], d_addr [8];
  qval_t            e_data [8], fm_rdata [8];
  logic             e_idx_we, d_idx_re;
  logic [IA_W-1:0]  e_idx_addr, d_idx_addr;
  logic [63:0]      e_idx_data, idx_rdata;
  logic             b_wr_buf, b_rd_buf, b_idx_we, b_idx_re, b_idx_wh, b_idx_rh;
  logic [7:0]       b_we, b_re;
  logic [FA_W-1:0]  b_waddr [8], b_raddr [8];
  qval_t            b_wdata [8];
  logic [IA_W-1:0]  b_idx_waddr, b_idx_raddr;
  logic [63:0]      b_idx_wdata;
  logic [7:0]       sp_we, sp_re;
  logic [3:0]       sp_wlane [8];
  logic [SPA_W-1:0] sp_waddr [8], sp_raddr [8];
  logic [127:0]     sp_wdata [8], sp_rdata [8];

  // buffer manager: the running layer reads the input buffer and writes
  // the other one; otherwise the feature map DMA has the ports
  always_comb begin
    b_wr_buf    = l_busy ? !in_sel : ddma_wr_buf;
    b_we        = l_busy ? e_we : ddma_we;
    b_waddr     = l_busy ? e_addr : ddma_waddr;
    b_wdata     = l_busy ? e_data : ddma_wdata;
    b_rd_buf    = l_busy ? in_sel : ddma_rd_buf;
    b_re        = l_busy ? d_re : ddma_re;
    b_raddr     = l_busy ? d_addr : ddma_raddr;
    b_idx_wh    = l_busy ? !in_sel : ddma_idx_wr_half;
    b_idx_we    = l_busy ? e_idx_we : ddma_idx_we;
    b_idx_waddr = l_busy ? e_idx_addr : ddma_idx_waddr;
    b_idx_wdata = l_busy ? e_idx_data : ddma_idx_wdata;
    b_idx_rh    = l_busy ? in_sel : ddma_idx_rd_half;
    b_idx_re    = l_busy ? d_idx_re : ddma_idx_re;
    b_idx_raddr = l_busy ? d_idx_addr : ddma_idx_raddr;
  end
  assign ddma_rdata     = fm_rdata;
  assign ddma_idx_rdata = idx_rdata;

  buffer_bank #(.FMB_KB(FMB_KB), .CM_SUB_KB(CM_SUB_KB), .SP_KB(SP_KB), .IDX_KB(IDX_KB)) u_bank (
    .clk, .rst_n, .cm_sp,
    .wr_buf(b_wr_buf), .wr_we(b_we), .wr_addr(b_waddr), .wr_data(b_wdata),
    .rd_buf(b_rd_buf), .rd_re(b_re), .rd_addr(b_raddr), .rd_data(fm_rdata),
    .idx_wr_half(b_idx_wh), .idx_we(b_idx_we), .idx_waddr(b_idx_waddr), .idx_wdata(b_idx_wdata),
    .idx_rd_half(b_idx_rh), .idx_re(b_idx_re), .idx_raddr(b_idx_raddr), .idx_rdata(idx_rdata),
    .sp_we, .sp_wlane, .sp_waddr, .sp_wdata, .sp_re, .sp_raddr, .sp_rdata, .oob_error);

  // ------------------------------------------------------------ datapath
  data_t ifm_col [4][8];
  data_t pe_col [4][8];
  data_t pe_w [4][9];

  ifm_path #(.FA_W(FA_W), .IA_W(IA_W)) u_ifm (
    .clk, .rst_n, .start(ifm_start), .level(cfg.q_level_in), .dq_mult(cfg.dq_mult),
    .dq_shift(cfg.dq_shift), .idx_re(d_idx_re), .idx_addr(d_idx_addr), .idx_rdata,
    .fm_re(d_re), .fm_addr(d_addr), .fm_rdata, .col_valid, .col_ready(col_pop), .col(ifm_col));

  always_comb
    for (int c = 0; c < 4; c++) begin
      for (int r = 0; r < 8; r++) pe_col[c][r] = pe_zero ? '0 : ifm_col[c][r];
      pe_w[c] = w_act[pe_tag.f][c];
    end

  logic    pa_valid;
  pe_tag_t pa_tag;
  psum_t   pa_psum [64];
  psum_t   acc_in [10];
  pe_array #(.TAG_W($bits(pe_tag_t))) u_pe (
    .clk, .rst_n, .mode1x1(1'b0), .in_valid(pe_valid), .shift(pe_shift), .in_tag(pe_tag),
    .col(pe_col), .w(pe_w), .out_valid(pa_valid), .out_tag(pa_tag), .psum(pa_psum));
  always_comb for (int k = 0; k < 10; k++) acc_in[k] = pa_psum[k];

  logic       sp_ovalid, sp_oready;
  psum_t      sp_ocol [4][8];
  logic [5:0] sp_orf;
  logic [8:0] sp_oc;
  scratch_pad_acc #(.SPA_W(SPA_W), .MAX_W(MAX_W)) u_sp (
    .clk, .rst_n, .w_cols({cfg.w_blk, 3'b000}),
    .acc_valid(pa_valid), .acc_psum(acc_in), .acc_f(pa_tag.f), .acc_rf(pa_tag.rf),
    .acc_col(pa_tag.col), .acc_first(pa_tag.first), .acc_main_ok(pa_tag.main_ok),
    .acc_prev_ok(pa_tag.prev_ok),
    .rd_valid, .rd_ready, .rd_rf, .rd_col,
    .out_valid(sp_ovalid), .out_ready(sp_oready), .out_col(sp_ocol), .out_rf(sp_orf),
    .out_colidx(sp_oc),
    .sp_we, .sp_wlane, .sp_waddr, .sp_wdata, .sp_re, .sp_raddr, .sp_rdata);

  logic  nl_ovalid, nl_oready;
  data_t nl_ocol [4][8];
  nonlinear #(.MAX_W(MAX_W)) u_nl (
    .clk, .rst_n, .cfg(cfg.nl), .psum_shift(cfg.psum_shift), .bn(bn_act),
    .in_valid(sp_ovalid), .in_ready(sp_oready), .in_col(sp_ocol), .in_c(sp_oc),
    .in_rf_odd(sp_orf[0]), .out_valid(nl_ovalid), .out_ready(nl_oready), .out_col(nl_ocol));

  logic ofm_idle;
  ofm_path #(.FA_W(FA_W), .IA_W(IA_W)) u_ofm (
    .clk, .rst_n, .start(ofm_start), .level(cfg.q_level_out), .q_mult(cfg.q_mult),
    .q_shift(cfg.q_shift), .in_valid(nl_ovalid), .in_ready(nl_oready), .in_col(nl_ocol),
    .fm_we(e_we), .fm_addr(e_addr), .fm_wdata(e_data), .idx_we(e_idx_we), .idx_addr(e_idx_addr),
    .idx_wdata(e_idx_data), .blk_count(out_blocks), .nz_count(out_nonzeros), .idle(ofm_idle));

  assign out_idle = ofm_idle && !nl_ovalid && !sp_ovalid;
endmodule
