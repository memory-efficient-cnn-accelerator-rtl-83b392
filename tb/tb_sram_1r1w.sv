// tb_sram_1r1w: random reads and lane-masked writes against an array model
// of the memory. Checks one cycle of read latency, that a read of the word
// being written returns the old value, that only enabled lanes change,
// and that the read register holds its value on cycles without a read.
`timescale 1ns/1ps
module tb_sram_1r1w;
  logic clk = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  localparam int DEPTH = 64, WIDTH = 32, NLANE = 4;
  logic we = 0, re = 0;
  logic [NLANE-1:0] wlane = '0;
  logic [5:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  logic [WIDTH-1:0] exp_r;
  bit exp_v = 0;

  sram_1r1w #(.DEPTH(DEPTH), .WIDTH(WIDTH), .NLANE(NLANE)) dut (.clk, .we, .wlane, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // initialise every word through the write port
    for (int a = 0; a < DEPTH; a++) begin
      we <= 1; wlane <= '1; waddr <= 6'(a); wdata <= $urandom; model[a] = '0;
      @(posedge clk);
    end
    we <= 0;
    @(posedge clk);
    for (int a = 0; a < DEPTH; a++) begin re <= 1; raddr <= 6'(a); @(posedge clk); re <= 0; @(posedge clk); model[a] = rdata; end
    for (int t = 0; t < 3000; t++) begin
      logic lwe, lre;
      logic [3:0] lwl;
      logic [5:0] lwa, lra;
      logic [31:0] lwd;
      lwe = 1'($urandom_range(1)); lre = 1'($urandom_range(1)); lwl = 4'($urandom);
      lwa = 6'($urandom); lra = (t % 7 == 0) ? lwa : 6'($urandom); lwd = $urandom;
      we <= lwe; re <= lre; wlane <= lwl; waddr <= lwa; raddr <= lra; wdata <= lwd;
      @(posedge clk);
      // rdata now reflects this cycle's read (old contents on a collision)
      if (lre) begin exp_r = model[lra]; exp_v = 1; end
      #0.5;
      if (exp_v) begin
        checks++;
        if (rdata !== exp_r) begin failures++; if (failures < 10) $display("FAIL t=%0d rdata %h exp %h", t, rdata, exp_r); end
      end
      if (lwe) for (int l = 0; l < 4; l++) if (lwl[l]) model[lwa][l*8 +: 8] = lwd[l*8 +: 8];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
