// tb_instr_queue: loads a random program through the instruction DMA port
// while the queue is idle (with gaps), starts it with enable and takes the
// instructions with random back-pressure. Checks order and content, that
// loading is refused while running, that execution stops after END (the
// instructions behind it are dropped), that a program without END stops
// when the stored instructions run out, and that a full queue refuses
// more instructions.
`timescale 1ns/1ps
module tb_instr_queue;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  localparam int DEPTH = 16;
  logic cdma_valid = 0, cdma_ready, enable = 0, running, instr_valid, instr_ready = 0;
  logic [63:0] cdma_data = '0, instr;
  logic [63:0] prog [$];
  logic [63:0] got [$];

  instr_queue #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .cdma_valid, .cdma_ready, .cdma_data, .enable,
                                    .running, .instr_valid, .instr_ready, .instr);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    instr_ready <= 1'($urandom_range(1));
    if (instr_valid && instr_ready) got.push_back(instr);
    if (running) check(!cdma_ready, "no loading while running");
  end

  task automatic load(int n, int end_at);
    prog = {};
    for (int k = 0; k < n; k++) begin
      logic [63:0] v;
      v = {4'(k == end_at ? 3 : $urandom_range(2)), 28'($urandom), 32'($urandom)};
      prog.push_back(v);
      while ($urandom_range(2) == 0) begin cdma_valid <= 0; @(posedge clk); end
      cdma_valid <= 1; cdma_data <= v;
      @(posedge clk);
      while (!cdma_ready) @(posedge clk);
    end
    cdma_valid <= 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int pass = 0; pass < 6; pass++) begin
      int n, e, nexp;
      n = 3 + $urandom_range(10);
      e = (pass % 2 == 0) ? int'($urandom_range(n - 1)) : -1;   // END position or none
      load(n, e);
      got = {};
      @(posedge clk);
      enable <= 1; @(posedge clk); enable <= 0;
      @(posedge clk);
      wait (!running);
      @(posedge clk);
      nexp = (e >= 0) ? e + 1 : n;
      check(got.size() == nexp, $sformatf("pass %0d: %0d instructions taken, exp %0d", pass, got.size(), nexp));
      for (int k = 0; k < nexp && k < got.size(); k++) check(got[k] == prog[k], $sformatf("pass %0d instr %0d", pass, k));
    end
    // fill the queue completely: the next instruction must be refused
    for (int k = 0; k < DEPTH; k++) begin
      cdma_valid <= 1; cdma_data <= 64'(k); @(posedge clk);
    end
    cdma_valid <= 1;
    #0.5;
    check(!cdma_ready, "full queue refuses");
    cdma_valid <= 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
