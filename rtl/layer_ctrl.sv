// layer_ctrl: sequencer of one 3x3 convolution layer (fusion layer: conv,
// then BN / activation / pooling, then compression), paper Sec. IV, V-A
// and Fig. 7.
//
// Loop order (weight reuse: a filter set stays while the whole input map
// is scanned):
//   for each output group g of 4 filters
//     for each input group cg of 4 channels           (weights of (g, cg))
//       for each row frame rf = 0 .. H/8  (the extra frame finishes
//                                          rows 6, 7 of the last one)
//         for each column c = 0 .. W+1    (two extra columns finish the
//                                          last two output columns)
//           for each filter f = 0 .. 3: one PE array cycle
//     read out the scratch pad frame by frame, column by column, through
//     the non-linear module to the compression path.
// A new input column is taken on f = 0 (shift); the other three cycles
// reuse it with the next filter's weights. Columns beyond the map are
// zeros (zero padding at the bottom and right). The next weight set is
// preloaded during each scan; the BN parameters after the last input
// group. The decompression path restarts for every output group, since
// the compressed input is read again for each.
//
// Output geometry: output pixel (r, c) = sum over i, j of input (r+i, c+j)
// times W(i, j), with zeros outside the map, so the output has the input's
// size (before pooling). This follows from the paper's row-frame scheme.
module layer_ctrl
  import accel_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  layer_cfg_t cfg,
  output logic       busy,
  output logic       done,
  // weight decoder
  output logic       load_req,
  output logic       load_bn,
  input  logic       load_done,
  output logic       swap_w,
  output logic       swap_bn,
  // decompression path
  output logic       ifm_start,
  input  logic       col_valid,
  output logic       col_pop,
  // PE array
  output logic       pe_valid,
  output logic       pe_shift,
  output logic       pe_zero,
  output pe_tag_t    pe_tag,
  // scratch pad read-out
  output logic       rd_valid,
  input  logic       rd_ready,
  output logic [5:0] rd_rf,
  output logic [8:0] rd_col,
  // compression path
  output logic       ofm_start,
  input  logic       out_idle,
  // mechanism counters (read by tests and status)
  output logic [31:0] n_stall,      // cycles waiting for decompressed data
  output logic [31:0] n_flush_cols  // zero-padding column cycles issued
);
  typedef enum logic [3:0] {S_IDLE, S_GSTART, S_WAIT_W0, S_SCAN, S_SCAN_END, S_DRAIN,
                            S_READ, S_FLUSH, S_DONE} state_e;
  state_e     st;
  logic [5:0] g, cg, rf;
  logic [8:0] c;
  logic [1:0] f;
  logic [3:0] wait_cnt;
  logic [8:0] w_cols;
  logic       in_map, need_col, fire;

  always_comb begin
    w_cols   = {cfg.w_blk, 3'b000};
    in_map   = rf < cfg.h_rf && c < w_cols;
    need_col = f == 2'd0 && in_map;
    fire     = st == S_SCAN && (!need_col || col_valid);
    pe_valid = fire;
    pe_shift = f == 2'd0;
    pe_zero  = !in_map;
    col_pop  = fire && need_col;
    pe_tag.f       = f;
    pe_tag.rf      = rf;
    pe_tag.col     = c - 9'd2;
    pe_tag.first   = cg == 6'd0;
    pe_tag.main_ok = c >= 9'd2 && rf < cfg.h_rf;
    pe_tag.prev_ok = c >= 9'd2 && rf != 6'd0;
    rd_valid = st == S_READ;
    rd_rf    = rf;
    rd_col   = c;
    busy     = st != S_IDLE;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; g <= '0; cg <= '0; rf <= '0; c <= '0; f <= '0; wait_cnt <= '0;
      done <= 1'b0; load_req <= 1'b0; load_bn <= 1'b0; swap_w <= 1'b0; swap_bn <= 1'b0;
      ifm_start <= 1'b0; ofm_start <= 1'b0; n_stall <= '0; n_flush_cols <= '0;
    end else begin
      done <= 1'b0; load_req <= 1'b0; swap_w <= 1'b0; swap_bn <= 1'b0;
      ifm_start <= 1'b0; ofm_start <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          g <= '0; ofm_start <= 1'b1; n_stall <= '0; n_flush_cols <= '0;
          st <= S_GSTART;
        end
        S_GSTART: begin
          cg <= '0; ifm_start <= 1'b1;
          load_req <= 1'b1; load_bn <= 1'b0;
          st <= S_WAIT_W0;
        end
        S_WAIT_W0: if (load_done && !load_req) begin
          swap_w   <= 1'b1;
          load_req <= 1'b1;
          load_bn  <= cfg.cin_grp == 6'd1;     // next: weights of cg 1, or BN
          rf <= '0; c <= '0; f <= '0;
          st <= S_SCAN;
        end
        S_SCAN: begin
          if (st == S_SCAN && need_col && !col_valid) n_stall <= n_stall + 1;
          if (fire) begin
            if (f == 2'd0 && !in_map) n_flush_cols <= n_flush_cols + 1;
            f <= f + 2'd1;
            if (f == 2'd3) begin
              if (c == w_cols + 9'd1) begin
                c <= '0;
                if (rf == cfg.h_rf) st <= S_SCAN_END;
                else rf <= rf + 6'd1;
              end else c <= c + 9'd1;
            end
          end
        end
        S_SCAN_END: if (load_done && !load_req) begin
          if (cg + 6'd1 < cfg.cin_grp) begin
            cg <= cg + 6'd1;
            swap_w   <= 1'b1;
            load_req <= 1'b1;
            load_bn  <= cg + 6'd2 >= cfg.cin_grp;
            rf <= '0; c <= '0; f <= '0;
            st <= S_SCAN;
          end else begin
            wait_cnt <= '0;
            st <= S_DRAIN;
          end
        end
        S_DRAIN: begin          // let the PE array and accumulation finish
          wait_cnt <= wait_cnt + 4'd1;
          if (wait_cnt == 4'd4) begin
            swap_bn <= 1'b1;
            rf <= '0; c <= '0;
            st <= S_READ;
          end
        end
        S_READ: if (rd_ready) begin
          if (c == w_cols - 9'd1) begin
            c <= '0;
            if (rf == cfg.h_rf - 6'd1) begin
              wait_cnt <= '0;
              st <= S_FLUSH;
            end else rf <= rf + 6'd1;
          end else c <= c + 9'd1;
        end
        S_FLUSH: begin          // wait until the compression path is empty
          if (out_idle) wait_cnt <= wait_cnt + 4'd1;
          else          wait_cnt <= '0;
          if (wait_cnt == 4'd8) begin
            if (g + 6'd1 < cfg.cout_grp) begin
              g  <= g + 6'd1;
              st <= S_GSTART;
            end else st <= S_DONE;
          end
        end
        S_DONE: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
