// tb_weight_decoder: streams weight sets and per-channel parameter sets
// through the weight DMA port with random gaps and checks the double
// buffering: after a load and swap_w the active weights w_act[f][c][k]
// equal the streamed words in the order filter, channel, tap; while the
// next set is being preloaded the active copy must not change; after a
// BN load and swap_bn each lane holds its gamma, beta and alpha. Also
// checks that load_done falls while a load is pending and rises after.
`timescale 1ns/1ps
module tb_weight_decoder;
  import accel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic wdma_valid = 0, wdma_ready;
  logic [15:0] wdma_data = '0;
  logic load_req = 0, load_bn = 0, load_done, swap_w = 0, swap_bn = 0;
  data_t w_act [4][4][9];
  bn_par_t bn_act [4];
  int q [$];

  weight_decoder dut (.clk, .rst_n, .wdma_valid, .wdma_ready, .wdma_data, .load_req, .load_bn, .load_done,
                      .swap_w, .swap_bn, .w_act, .bn_act);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (wdma_valid && wdma_ready) void'(q.pop_front());
    if (q.size() > 0 && $urandom_range(3) != 0) begin wdma_valid <= 1; wdma_data <= 16'(q[0]); end
    else wdma_valid <= 0;
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic load(bit bn);
    load_req <= 1; load_bn <= bn; @(posedge clk); load_req <= 0;
    @(posedge clk);
    chk(!load_done, "load_done low during a load");
  endtask

  initial begin
    int set [3][144];
    int par [12];
    data_t snap [4][4][9];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int s = 0; s < 3; s++)
      for (int k = 0; k < 144; k++) set[s][k] = int'($urandom_range(65535)) - 32768;
    for (int k = 0; k < 12; k++) par[k] = int'($urandom_range(65535)) - 32768;
    // set 0
    foreach (set[0][k]) q.push_back(set[0][k]);
    load(0);
    wait (load_done);
    @(posedge clk);
    swap_w <= 1; @(posedge clk); swap_w <= 0; @(posedge clk);
    for (int s = 1; s < 3; s++) begin
      for (int f = 0; f < 4; f++) for (int c = 0; c < 4; c++) for (int k = 0; k < 9; k++) begin
        chk(int'(w_act[f][c][k]) == set[s-1][f*36 + c*9 + k], $sformatf("set %0d w[%0d][%0d][%0d]", s - 1, f, c, k));
        snap[f][c][k] = w_act[f][c][k];
      end
      // preload the next set; active weights must hold meanwhile
      foreach (set[s][k]) q.push_back(set[s][k]);
      load(0);
      while (!load_done) begin
        @(posedge clk);
        chk(w_act == snap, "active weights stable during preload");
      end
      swap_w <= 1; @(posedge clk); swap_w <= 0; @(posedge clk);
    end
    for (int f = 0; f < 4; f++) for (int c = 0; c < 4; c++) for (int k = 0; k < 9; k++)
      chk(int'(w_act[f][c][k]) == set[2][f*36 + c*9 + k], "last set");
    // BN parameters
    foreach (par[k]) q.push_back(par[k]);
    load(1);
    wait (load_done);
    swap_bn <= 1; @(posedge clk); swap_bn <= 0; @(posedge clk);
    for (int l = 0; l < 4; l++) begin
      chk(int'(bn_act[l].gamma) == par[3*l], $sformatf("gamma %0d", l));
      chk(int'(bn_act[l].beta) == par[3*l + 1], $sformatf("beta %0d", l));
      chk(int'(bn_act[l].alpha) == par[3*l + 2], $sformatf("alpha %0d", l));
    end
    for (int f = 0; f < 4; f++) for (int c = 0; c < 4; c++) for (int k = 0; k < 9; k++)
      chk(int'(w_act[f][c][k]) == set[2][f*36 + c*9 + k], "weights kept over a BN load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
