// tb_buffer_bank: checks the buffer bank at its full size in four
// configurations of the configurable memories (none, A0+A1, A0+B1, all
// four sub-banks given to the scratch pad). For each it writes random data
// to random addresses of every logical space - feature map buffer A and B
// (8 pieces each, including the regions that live in the sub-banks kept as
// feature map memory), the scratch pad (8 banks, 4 lane enables, including
// the regions borrowed from sub-banks) and both index buffer halves -
// favouring addresses near the region boundaries, then reads every written
// address back and compares with a model that keeps each space separate.
// Any aliasing between spaces shows as a mismatch. Finally accesses just
// past the configured size must raise oob_error.
`timescale 1ns/1ps
module tb_buffer_bank;
  import accel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  localparam int FA_W = 15, SPA_W = 11, IA_W = 11;
  localparam int FMB = 16384, SUBB = 4096, SPD = 512, SUBW = 256;
  logic [3:0] cm_sp = '0;
  logic wr_buf = 0, rd_buf = 0;
  logic [7:0] wr_we = '0, rd_re = '0;
  logic [FA_W-1:0] wr_addr [8], rd_addr [8];
  qval_t wr_data [8], rd_data [8];
  logic idx_wr_half = 0, idx_we = 0, idx_rd_half = 0, idx_re = 0;
  logic [IA_W-1:0] idx_waddr = '0, idx_raddr = '0;
  logic [63:0] idx_wdata = '0, idx_rdata;
  logic [7:0] sp_we = '0, sp_re = '0;
  logic [3:0] sp_wlane [8];
  logic [SPA_W-1:0] sp_waddr [8], sp_raddr [8];
  logic [127:0] sp_wdata [8], sp_rdata [8];
  logic oob_error;
  int n_oob = 0;

  buffer_bank dut (.clk, .rst_n, .cm_sp, .wr_buf, .wr_we, .wr_addr, .wr_data, .rd_buf, .rd_re, .rd_addr,
                   .rd_data, .idx_wr_half, .idx_we, .idx_waddr, .idx_wdata, .idx_rd_half, .idx_re,
                   .idx_raddr, .idx_rdata, .sp_we, .sp_wlane, .sp_waddr, .sp_wdata, .sp_re, .sp_raddr,
                   .sp_rdata, .oob_error);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (oob_error) n_oob++;

  function automatic int fm_size(bit b);
    int n = FMB;
    for (int s = 0; s < 2; s++) if (!cm_sp[2*b + s]) n += SUBB;
    return n;
  endfunction
  function automatic int sp_size();
    int n = SPD;
    for (int s = 0; s < 4; s++) if (cm_sp[s]) n += SUBW;
    return n;
  endfunction
  // random address in [0, size), often near a multiple of `region`
  function automatic int pick(int size, int base, int region);
    int a;
    if ($urandom_range(1)) begin
      a = base + region * int'($urandom_range(3)) + int'($urandom_range(7)) - 4;
      if (a < 0) a = 0;
    end else a = int'($urandom_range(size - 1));
    return (a >= size) ? size - 1 - int'($urandom_range(3)) : a;
  endfunction

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  task automatic run_cfg(logic [3:0] cfg);
    int fm [2][8][int];
    logic [31:0] sp [8][int][4];
    bit spv [8][int][4];
    logic [63:0] ix [2][int];
    cm_sp <= cfg;
    @(posedge clk);
    // writes
    for (int t = 0; t < 400; t++) begin
      bit b;
      int a [8], sa [8], ia;
      b = 1'($urandom_range(1));
      wr_buf <= b; wr_we <= 8'($urandom); sp_we <= 8'($urandom); idx_we <= 1'($urandom_range(1));
      for (int p = 0; p < 8; p++) begin
        a[p] = pick(fm_size(b), FMB, SUBB);
        sa[p] = pick(sp_size(), SPD, SUBW);
        wr_addr[p] <= FA_W'(a[p]); wr_data[p] <= qval_t'($urandom);
        sp_waddr[p] <= SPA_W'(sa[p]); sp_wlane[p] <= 4'($urandom); sp_wdata[p] <= {$urandom, $urandom, $urandom, $urandom};
      end
      ia = int'($urandom_range(2047));
      idx_wr_half <= 1'($urandom_range(1)); idx_waddr <= IA_W'(ia); idx_wdata <= {$urandom, $urandom};
      @(posedge clk);
      for (int p = 0; p < 8; p++) begin
        if (wr_we[p]) fm[b][p][a[p]] = int'(wr_data[p]);
        if (sp_we[p]) for (int l = 0; l < 4; l++)
          if (sp_wlane[p][l]) begin sp[p][sa[p]][l] = sp_wdata[p][32*l +: 32]; spv[p][sa[p]][l] = 1; end
      end
      if (idx_we) ix[idx_wr_half][ia] = idx_wdata;
    end
    wr_we <= '0; sp_we <= '0; idx_we <= 0;
    @(posedge clk);
    chk(n_oob == 0, "no oob_error on valid addresses");
    // read back feature maps
    for (int b = 0; b < 2; b++)
      for (int p = 0; p < 8; p++)
        foreach (fm[b][p][a]) begin
          rd_buf <= 1'(b); rd_re <= 8'(1 << p); rd_addr[p] <= FA_W'(a);
          @(posedge clk); rd_re <= '0; #0.5;
          chk(int'(rd_data[p]) == fm[b][p][a], $sformatf("cfg %b fm %0d piece %0d addr %0d: got %0d exp %0d", cfg, b, p, a, rd_data[p], fm[b][p][a]));
        end
    for (int p = 0; p < 8; p++)
      foreach (sp[p][a]) begin
        sp_re <= 8'(1 << p); sp_raddr[p] <= SPA_W'(a);
        @(posedge clk); sp_re <= '0; #0.5;
        for (int l = 0; l < 4; l++)
          if (spv[p][a][l]) chk(sp_rdata[p][32*l +: 32] == sp[p][a][l], $sformatf("cfg %b sp bank %0d addr %0d lane %0d", cfg, p, a, l));
      end
    for (int h = 0; h < 2; h++)
      foreach (ix[h][a]) begin
        idx_rd_half <= 1'(h); idx_re <= 1; idx_raddr <= IA_W'(a);
        @(posedge clk); idx_re <= 0; #0.5;
        chk(idx_rdata == ix[h][a], $sformatf("cfg %b index half %0d addr %0d", cfg, h, a));
      end
    // out of range
    n_oob = 0;
    wr_buf <= 0; wr_we <= 8'h01; wr_addr[0] <= FA_W'(fm_size(0));
    @(posedge clk); wr_we <= '0;
    sp_we <= 8'h01; sp_wlane[0] <= 4'hf; sp_waddr[0] <= SPA_W'(sp_size());
    @(posedge clk); sp_we <= '0;
    repeat (3) @(posedge clk);
    chk(n_oob >= 2, $sformatf("cfg %b out-of-range accesses flagged (%0d)", cfg, n_oob));
    n_oob = 0;
  endtask

  initial begin
    for (int p = 0; p < 8; p++) begin
      wr_addr[p] = '0; rd_addr[p] = '0; wr_data[p] = '0; sp_wlane[p] = '0; sp_waddr[p] = '0;
      sp_raddr[p] = '0; sp_wdata[p] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_cfg(4'b0000);
    run_cfg(4'b0011);
    run_cfg(4'b1001);
    run_cfg(4'b1111);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
