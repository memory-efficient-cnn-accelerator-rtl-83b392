// sram_1r1w: synchronous memory array, one read and one write port.
//
// Stands for one SRAM piece of the buffer bank. Write data is split into
// NLANE equal lanes with a write enable each (byte or word enables). The
// read data register updates only on a read, so it holds its value while
// a consumer stalls. A read of the address being written returns the old
// word. The paper specifies single-port SRAM; two ports are used here so
// that partial sums can be read and written back in the same cycle.
module sram_1r1w #(
  parameter int DEPTH = 1024,
  parameter int WIDTH = 32,
  parameter int NLANE = 1,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [NLANE-1:0] wlane,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  localparam int LW = WIDTH / NLANE;
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we)
      for (int l = 0; l < NLANE; l++)
        if (wlane[l]) mem[waddr][l*LW +: LW] <= wdata[l*LW +: LW];
  end
endmodule
