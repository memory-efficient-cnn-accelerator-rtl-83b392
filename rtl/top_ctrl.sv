// top_ctrl: top-level control unit (paper Sec. IV, Fig. 6). Holds the
// configuration registers of all sub-modules and executes instructions
// from the instruction queue in order.
//
// Instruction format (this design's own; the paper gives none):
//   [63:60] opcode: 0 NOP, 1 SETREG, 2 CONV, 3 END
//   SETREG: [59:56] register, [31:0] value
//     reg 0  layer size: w_blk [5:0], h_rf [11:6], cin_grp [17:12], cout_grp [23:18]
//     reg 1  quantisation: q_level_in [1:0], q_level_out [3:2], q_shift [8:4],
//            dq_shift [13:9], psum_shift [18:14]
//     reg 2  q_mult [15:0], dq_mult [31:16]
//     reg 3  non-linear configuration (nl_cfg_t, bits [18:0])
//     reg 4  buffers: cm_sp [3:0] (configurable sub-banks to scratch pad),
//            in_sel [4] (feature map buffer holding the layer input)
//   CONV: run one layer with the current registers; when it is done the
//         ping-pong buffers swap (the output becomes the next input).
//   END: stop; halted goes high.
module top_ctrl
  import accel_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        instr_valid,
  output logic        instr_ready,
  input  logic [63:0] instr,
  output layer_cfg_t  cfg,
  output logic [3:0]  cm_sp,
  output logic        in_sel,
  output logic        layer_start,
  input  logic        layer_done,
  output logic        layer_busy,
  output logic        halted,
  output logic [15:0] n_layers
);
  logic [3:0] op;
  assign op = instr[63:60];
  assign instr_ready = !layer_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '0; cm_sp <= '0; in_sel <= 1'b0; layer_start <= 1'b0; layer_busy <= 1'b0;
      halted <= 1'b0; n_layers <= '0;
    end else begin
      layer_start <= 1'b0;
      if (layer_busy) begin
        if (layer_done) begin
          layer_busy <= 1'b0;
          in_sel     <= !in_sel;
          n_layers   <= n_layers + 16'd1;
        end
      end else if (instr_valid) begin
        halted <= 1'b0;
        case (op)
          4'd1: case (instr[59:56])
            4'd0: begin
              cfg.w_blk <= instr[5:0]; cfg.h_rf <= instr[11:6];
              cfg.cin_grp <= instr[17:12]; cfg.cout_grp <= instr[23:18];
            end
            4'd1: begin
              cfg.q_level_in <= instr[1:0]; cfg.q_level_out <= instr[3:2];
              cfg.q_shift <= instr[8:4]; cfg.dq_shift <= instr[13:9];
              cfg.psum_shift <= instr[18:14];
            end
            4'd2: begin
              cfg.q_mult <= instr[15:0]; cfg.dq_mult <= instr[31:16];
            end
            4'd3: cfg.nl <= nl_cfg_t'(instr[18:0]);
            4'd4: begin
              cm_sp <= instr[3:0]; in_sel <= instr[4];
            end
            default: ;
          endcase
          4'd2: begin
            layer_start <= 1'b1;
            layer_busy  <= 1'b1;
          end
          4'd3: halted <= 1'b1;
          default: ;
        endcase
      end
    end
  end
endmodule
