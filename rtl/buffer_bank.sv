// buffer_bank: the 480 KB on-chip buffer bank with its buffer manager.
//
// Contents (paper Sec. IV, V-C, Fig. 11, Table I):
//   feature map buffers A and B, 128 KB each, 8 pieces (one per matrix
//     row, see sparse_encoder) of FMB_KB*1024/8 entries of 8 bits;
//   two 64 KB configurable memories, one paired with each feature map
//     buffer, each made of two 32 KB sub-banks (A0, A1, B0, B1);
//   the 64 KB scratch pad: 8 banks (one per row of a row frame) of
//     128-bit words holding 4 partial sums (one per output channel lane);
//   the 32 KB index buffer, split in two halves that pair with A and B.
// Each configurable sub-bank joins either its feature map buffer or the
// scratch pad (cm_sp bit set), so the scratch pad is 64, 128 or 192 KB and
// each feature map buffer 128, 160 or 192 KB, as in the paper. A sub-bank
// is built like the scratch pad (8 pieces of 128-bit words with byte
// enables); used for feature maps it is addressed byte by byte.
//
// Logical addresses: a feature map piece address below the base depth
// goes to the buffer itself, the next 4 KB regions go to that buffer's
// feature-map sub-banks in order (A0 before A1). A scratch pad bank address
// below the base depth goes to the scratch pad, the next 256-word regions
// go to the scratch-pad sub-banks in the order A0, A1, B0, B1. An access
// that falls outside the configured memory is dropped and raises
// oob_error for one cycle.
//
// Ports: one feature map write port and one read port, each with its own
// buffer select (the caller sets them for ping-pong operation), one index
// write and one read port with half selects, and a read and a write port
// per scratch pad bank. All reads have one cycle latency; read data hold
// until the next read of the same port.
module buffer_bank
  import accel_pkg::*;
#(
  parameter int FMB_KB    = 128,
  parameter int CM_SUB_KB = 32,
  parameter int SP_KB     = 64,
  parameter int IDX_KB    = 32,
  localparam int FMB_DEPTH = FMB_KB * 1024 / 8,       // entries per piece
  localparam int CM_WORDS  = CM_SUB_KB * 1024 / 8 / 16, // 128-bit words per piece
  localparam int CM_BYTES  = CM_WORDS * 16,
  localparam int SP_DEPTH  = SP_KB * 1024 / 8 / 16,
  localparam int IDX_DEPTH = IDX_KB * 1024 / 2 / 8,
  localparam int FA_W  = $clog2(FMB_DEPTH + 2 * CM_BYTES),
  localparam int SPA_W = $clog2(SP_DEPTH + 4 * CM_WORDS),
  localparam int IA_W  = $clog2(IDX_DEPTH),
  localparam int CWA_W = $clog2(CM_WORDS),
  localparam int CBA_W = $clog2(CM_BYTES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [3:0]        cm_sp,        // sub-bank A0,A1,B0,B1 -> scratch pad
  // feature map write port
  input  logic              wr_buf,       // 0: A, 1: B
  input  logic [7:0]        wr_we,
  input  logic [FA_W-1:0]   wr_addr [8],
  input  qval_t             wr_data [8],
  // feature map read port
  input  logic              rd_buf,
  input  logic [7:0]        rd_re,
  input  logic [FA_W-1:0]   rd_addr [8],
  output qval_t             rd_data [8],
  // index buffer
  input  logic              idx_wr_half,
  input  logic              idx_we,
  input  logic [IA_W-1:0]   idx_waddr,
  input  logic [63:0]       idx_wdata,
  input  logic              idx_rd_half,
  input  logic              idx_re,
  input  logic [IA_W-1:0]   idx_raddr,
  output logic [63:0]       idx_rdata,
  // scratch pad, one port pair per bank
  input  logic [7:0]        sp_we,
  input  logic [3:0]        sp_wlane [8],
  input  logic [SPA_W-1:0]  sp_waddr [8],
  input  logic [127:0]      sp_wdata [8],
  input  logic [7:0]        sp_re,
  input  logic [SPA_W-1:0]  sp_raddr [8],
  output logic [127:0]      sp_rdata [8],
  output logic              oob_error
);
  // ---------------------------------------------------------------- maps
  // Sub-bank (0..3) holding feature-map region k (1-based) of buffer b.
  function automatic int fmb_region_sub(logic [3:0] sp, logic b, int k);
    int n = 0;
    for (int s = 0; s < 2; s++)
      if (!sp[2*b + s]) begin
        n++;
        if (n == k) return 2*b + s;
      end
    return -1;
  endfunction
  // Sub-bank holding scratch pad region k (1-based).
  function automatic int sp_region_sub(logic [3:0] sp, int k);
    int n = 0;
    for (int s = 0; s < 4; s++)
      if (sp[s]) begin
        n++;
        if (n == k) return s;
      end
    return -1;
  endfunction

  // target: -1 dropped, 0 base memory, 1..4 = sub-bank 0..3
  function automatic int fmb_target(logic [3:0] sp, logic b, logic [FA_W-1:0] a);
    int k, s;
    if (int'(a) < FMB_DEPTH) return 0;
    k = (int'(a) - FMB_DEPTH) / CM_BYTES + 1;
    s = fmb_region_sub(sp, b, k);
    return (s < 0) ? -1 : s + 1;
  endfunction
  function automatic int sp_target(logic [3:0] sp, logic [SPA_W-1:0] a);
    int k, s;
    if (int'(a) < SP_DEPTH) return 0;
    k = (int'(a) - SP_DEPTH) / CM_WORDS + 1;
    s = sp_region_sub(sp, k);
    return (s < 0) ? -1 : s + 1;
  endfunction

  logic [7:0] oob_v;

  // ---------------------------------------------------------------- pieces
  for (genvar p = 0; p < 8; p++) begin : g_piece
    // feature map buffers A (0) and B (1)
    logic       fb_we [2], fb_re [2];
    qval_t      fb_rdata [2];
    // configurable sub-banks
    logic       cm_we [4], cm_re [4];
    logic [15:0] cm_wlane [4];
    logic [CWA_W-1:0] cm_waddr [4], cm_raddr [4];
    logic [127:0] cm_wdata [4], cm_rdata [4];
    // scratch pad base bank
    logic       spb_we, spb_re;
    logic [127:0] spb_rdata;
    int         wt, rt, swt, srt;
    logic [2:0] fm_rsrc_q, sp_rsrc_q;
    logic [3:0] fm_rbyte_q;
    logic       fm_rbuf_q;
    logic [CBA_W-1:0] wloc, rloc;
    logic [SPA_W-1:0] swloc, srloc;

    always_comb begin
      wt  = fmb_target(cm_sp, wr_buf, wr_addr[p]);
      rt  = fmb_target(cm_sp, rd_buf, rd_addr[p]);
      swt = sp_target(cm_sp, sp_waddr[p]);
      srt = sp_target(cm_sp, sp_raddr[p]);
      wloc  = CBA_W'(int'(wr_addr[p]) - FMB_DEPTH);
      rloc  = CBA_W'(int'(rd_addr[p]) - FMB_DEPTH);
      swloc = SPA_W'(int'(sp_waddr[p]) - SP_DEPTH);
      srloc = SPA_W'(int'(sp_raddr[p]) - SP_DEPTH);
      for (int b = 0; b < 2; b++) begin
        fb_we[b] = wr_we[p] && wr_buf == b[0] && wt == 0;
        fb_re[b] = rd_re[p] && rd_buf == b[0] && rt == 0;
      end
      spb_we = sp_we[p] && swt == 0;
      spb_re = sp_re[p] && srt == 0;
      for (int s = 0; s < 4; s++) begin
        if (cm_sp[s]) begin
          cm_we[s]    = sp_we[p] && swt == s + 1;
          cm_re[s]    = sp_re[p] && srt == s + 1;
          cm_waddr[s] = CWA_W'(swloc);
          cm_raddr[s] = CWA_W'(srloc);
          cm_wdata[s] = sp_wdata[p];
          for (int l = 0; l < 16; l++) cm_wlane[s][l] = sp_wlane[p][l/4];
        end else begin
          cm_we[s]    = wr_we[p] && wt == s + 1;
          cm_re[s]    = rd_re[p] && rt == s + 1;
          cm_waddr[s] = CWA_W'(wloc >> 4);
          cm_raddr[s] = CWA_W'(rloc >> 4);
          cm_wdata[s] = {16{wr_data[p]}};
          cm_wlane[s] = 16'(1) << wloc[3:0];
        end
      end
      oob_v[p] = (wr_we[p] && wt < 0) || (rd_re[p] && rt < 0) ||
                 (sp_we[p] && swt < 0) || (sp_re[p] && srt < 0);
    end

    for (genvar b = 0; b < 2; b++) begin : g_fb
      sram_1r1w #(.DEPTH(FMB_DEPTH), .WIDTH(QM)) u_fb (
        .clk, .we(fb_we[b]), .wlane(1'b1), .waddr(wr_addr[p][$clog2(FMB_DEPTH)-1:0]),
        .wdata(wr_data[p]), .re(fb_re[b]), .raddr(rd_addr[p][$clog2(FMB_DEPTH)-1:0]),
        .rdata(fb_rdata[b]));
    end
    for (genvar s = 0; s < 4; s++) begin : g_cm
      sram_1r1w #(.DEPTH(CM_WORDS), .WIDTH(128), .NLANE(16)) u_cm (
        .clk, .we(cm_we[s]), .wlane(cm_wlane[s]), .waddr(cm_waddr[s]), .wdata(cm_wdata[s]),
        .re(cm_re[s]), .raddr(cm_raddr[s]), .rdata(cm_rdata[s]));
    end
    sram_1r1w #(.DEPTH(SP_DEPTH), .WIDTH(128), .NLANE(16)) u_sp (
      .clk, .we(spb_we),
      .wlane({{4{sp_wlane[p][3]}}, {4{sp_wlane[p][2]}}, {4{sp_wlane[p][1]}}, {4{sp_wlane[p][0]}}}),
      .waddr(sp_waddr[p][$clog2(SP_DEPTH)-1:0]), .wdata(sp_wdata[p]),
      .re(spb_re), .raddr(sp_raddr[p][$clog2(SP_DEPTH)-1:0]), .rdata(spb_rdata));

    // read-data steering, selected by where the last read went
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        fm_rsrc_q <= '0; sp_rsrc_q <= '0; fm_rbyte_q <= '0; fm_rbuf_q <= 1'b0;
      end else begin
        if (rd_re[p]) begin
          fm_rsrc_q  <= (rt < 0) ? 3'd0 : 3'(rt);
          fm_rbyte_q <= rloc[3:0];
          fm_rbuf_q  <= rd_buf;
        end
        if (sp_re[p]) sp_rsrc_q <= (srt < 0) ? 3'd0 : 3'(srt);
      end
    end
    always_comb begin
      if (fm_rsrc_q == 0) rd_data[p] = fb_rdata[fm_rbuf_q];
      else                rd_data[p] = qval_t'(cm_rdata[fm_rsrc_q - 1][fm_rbyte_q*8 +: 8]);
      if (sp_rsrc_q == 0) sp_rdata[p] = spb_rdata;
      else                sp_rdata[p] = cm_rdata[sp_rsrc_q - 1];
    end
  end

  // ---------------------------------------------------------------- index
  logic [63:0] ix_rdata [2];
  logic        ix_rhalf_q;
  for (genvar h = 0; h < 2; h++) begin : g_idx
    sram_1r1w #(.DEPTH(IDX_DEPTH), .WIDTH(64)) u_ix (
      .clk, .we(idx_we && idx_wr_half == h[0]), .wlane(1'b1), .waddr(idx_waddr), .wdata(idx_wdata),
      .re(idx_re && idx_rd_half == h[0]), .raddr(idx_raddr), .rdata(ix_rdata[h]));
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ix_rhalf_q <= 1'b0;
    else if (idx_re) ix_rhalf_q <= idx_rd_half;
  assign idx_rdata = ix_rdata[ix_rhalf_q];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) oob_error <= 1'b0;
    else        oob_error <= |oob_v;
endmodule
