// scratch_pad_acc: partial sum accumulation in the scratch pad and its
// read-out to the non-linear module (paper Sec. V-B, V-C, Fig. 9).
//
// The scratch pad has 8 banks, bank k holding row k of every row frame;
// a word holds the 4 output channel lanes of one (frame, column), at
// address frame * W + column. For each PE array result (one filter lane f):
//   PSUM0..5 are added into banks 0..5 of the current frame;
//   PSUM'6, PSUM'7 finish rows 6, 7 of the previous frame: they are added
//     to the PSUM''6/7 of that frame, held in a pending row buffer, and
//     the sum is accumulated into banks 6, 7 of the previous frame;
//   PSUM''6, PSUM''7 go into the pending row buffer for the next frame.
// On the first input channel group (first = 1) the bank words are written,
// not accumulated, so no clearing pass is needed. Accumulation is a
// read-modify-write: read in the input cycle, write one cycle later. The
// same address and lane comes back only four cycles later (four filters
// per column), so no forwarding is needed. The pending buffer is a
// W-column memory of 2 rows x 4 lanes, this design's way to hold PSUM''.
//
// Read-out: rd_valid/rd_ready request (frame, column); the 8 x 4 partial
// sums appear on out_* one cycle later and hold while out_ready is low.
// Read-out and accumulation must not overlap (the sequencer ensures it).
module scratch_pad_acc
  import accel_pkg::*;
#(
  parameter int SPA_W  = 11,
  parameter int MAX_W  = 256          // widest feature map, columns
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [8:0]       w_cols,    // feature map width W
  // accumulation input from the PE array
  input  logic             acc_valid,
  input  psum_t            acc_psum [10],
  input  logic [1:0]       acc_f,
  input  logic [5:0]       acc_rf,
  input  logic [8:0]       acc_col,
  input  logic             acc_first,
  input  logic             acc_main_ok,  // rows of the current frame valid
  input  logic             acc_prev_ok,  // rows 6, 7 of the previous frame valid
  // read-out
  input  logic             rd_valid,
  output logic             rd_ready,
  input  logic [5:0]       rd_rf,
  input  logic [8:0]       rd_col,
  output logic             out_valid,
  input  logic             out_ready,
  output psum_t            out_col [4][8],  // [lane][row]
  output logic [5:0]       out_rf,
  output logic [8:0]       out_colidx,
  // scratch pad bank ports (buffer bank)
  output logic [7:0]       sp_we,
  output logic [3:0]       sp_wlane [8],
  output logic [SPA_W-1:0] sp_waddr [8],
  output logic [127:0]     sp_wdata [8],
  output logic [7:0]       sp_re,
  output logic [SPA_W-1:0] sp_raddr [8],
  input  logic [127:0]     sp_rdata [8]
);
  localparam int PW_A = $clog2(MAX_W);

  // stage-1 registers (write stage)
  logic             s1_valid, s1_first, s1_main, s1_prev;
  logic [1:0]       s1_f;
  logic [SPA_W-1:0] s1_addr, s1_paddr;
  psum_t            s1_psum [10];
  logic [PW_A-1:0]  s1_col;
  // pending buffer
  logic [255:0]     pend_rdata;
  logic             pend_we;
  logic [7:0]       pend_lane;
  logic [255:0]     pend_wdata;
  logic             issue;
  logic [SPA_W-1:0] cur_addr, prev_addr, rd_addr;

  always_comb begin
    cur_addr  = SPA_W'(32'(acc_rf) * 32'(w_cols) + 32'(acc_col));
    prev_addr = SPA_W'((32'(acc_rf) - 32'd1) * 32'(w_cols) + 32'(acc_col));
    rd_addr   = SPA_W'(32'(rd_rf) * 32'(w_cols) + 32'(rd_col));
    issue     = rd_valid && (!out_valid || out_ready);
    rd_ready  = !out_valid || out_ready;

    for (int k = 0; k < 8; k++) begin
      sp_re[k]    = 1'b0;
      sp_raddr[k] = rd_addr;
      if (issue) sp_re[k] = 1'b1;
      else if (acc_valid && !acc_first) begin
        sp_re[k]    = (k < 6) ? acc_main_ok : acc_prev_ok;
        sp_raddr[k] = (k < 6) ? cur_addr : prev_addr;
      end
    end

    for (int k = 0; k < 8; k++) begin
      psum_t old, add;
      old = s1_first ? '0 : psum_t'(sp_rdata[k][s1_f*32 +: 32]);
      if (k < 6) add = s1_psum[k];
      else       add = s1_psum[k] + psum_t'(pend_rdata[((k-6)*4 + s1_f)*32 +: 32]);
      sp_we[k]    = s1_valid && ((k < 6) ? s1_main : s1_prev);
      sp_waddr[k] = (k < 6) ? s1_addr : s1_paddr;
      sp_wlane[k] = 4'(1) << s1_f;
      sp_wdata[k] = {4{old + add}};
    end

    pend_we    = s1_valid && s1_main;
    pend_lane  = 8'(1) << s1_f | 8'(1) << (4 + s1_f);
    pend_wdata = {{4{s1_psum[9]}}, {4{s1_psum[8]}}};

    for (int l = 0; l < 4; l++)
      for (int r = 0; r < 8; r++) out_col[l][r] = psum_t'(sp_rdata[r][l*32 +: 32]);
  end

  sram_1r1w #(.DEPTH(MAX_W), .WIDTH(256), .NLANE(8)) u_pend (
    .clk, .we(pend_we), .wlane(pend_lane), .waddr(s1_col), .wdata(pend_wdata),
    .re(acc_valid), .raddr(PW_A'(acc_col)), .rdata(pend_rdata));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_first <= 1'b0; s1_main <= 1'b0; s1_prev <= 1'b0; s1_f <= '0;
      s1_addr <= '0; s1_paddr <= '0; s1_col <= '0;
      for (int k = 0; k < 10; k++) s1_psum[k] <= '0;
      out_valid <= 1'b0; out_rf <= '0; out_colidx <= '0;
    end else begin
      s1_valid <= acc_valid;
      if (acc_valid) begin
        s1_first <= acc_first; s1_main <= acc_main_ok; s1_prev <= acc_prev_ok;
        s1_f <= acc_f; s1_addr <= cur_addr; s1_paddr <= prev_addr;
        s1_col <= PW_A'(acc_col); s1_psum <= acc_psum;
      end
      if (issue) begin
        out_valid <= 1'b1; out_rf <= rd_rf; out_colidx <= rd_col;
      end else if (out_ready) out_valid <= 1'b0;
    end
  end
endmodule
