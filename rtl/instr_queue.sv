// instr_queue: the instruction queue (paper Sec. IV, Fig. 6).
//
// While idle it stores 64-bit instructions arriving from the instruction
// DMA into a local memory, in order. enable starts execution: the
// instructions are handed to the top-level control unit one by one, in
// order, over a valid/ready handshake, until an END instruction has been
// taken or the stored instructions run out. The paper gives the queue's
// role, not its size or format; DEPTH and the encoding (see top_ctrl)
// are this design's.
module instr_queue #(
  parameter int DEPTH = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cdma_valid,
  output logic        cdma_ready,
  input  logic [63:0] cdma_data,
  input  logic        enable,
  output logic        running,
  output logic        instr_valid,
  input  logic        instr_ready,
  output logic [63:0] instr
);
  localparam int AW = $clog2(DEPTH);
  logic [63:0] mem [DEPTH];
  logic [AW:0] wp, pc;

  assign cdma_ready  = !running && wp != (AW+1)'(DEPTH);
  assign instr_valid = running && pc != wp;
  assign instr       = mem[pc[AW-1:0]];

  always_ff @(posedge clk)
    if (cdma_valid && cdma_ready) mem[wp[AW-1:0]] <= cdma_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; pc <= '0; running <= 1'b0;
    end else if (!running) begin
      if (cdma_valid && cdma_ready) wp <= wp + 1'b1;
      if (enable) begin
        running <= 1'b1;
        pc      <= '0;
      end
    end else begin
      if (instr_valid && instr_ready) begin
        pc <= pc + 1'b1;
        if (instr[63:60] == 4'd3) begin   // END
          running <= 1'b0;
          wp      <= '0;
        end
      end else if (pc == wp) begin
        running <= 1'b0;
        wp      <= '0;
      end
    end
  end
endmodule
