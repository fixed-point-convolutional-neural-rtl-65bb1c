// tb_ram_controller: image load and weight loads (all eight weighted LWDD
// layers) from a database model. Checks every feature-map word written
// (pixel p becomes p << (FRAC-8)), every packed weight word (nine weights
// per word, dense blocks zero-padded) and the two-clocks-per-value rate.
`timescale 1ns/1ps
module tb_ram_controller;
  import lwdd_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, load_img = 0;
  always #5 clk = ~clk;
  layer_t layer;
  logic busy, done, fm_we, wr_we;
  logic [1:0] rd_sel;
  logic [WDB_AW-1:0] rd_addr;
  data_t rdata, fm_wdata;
  logic [FM_AW-1:0] fm_waddr;
  logic [WRAM_AW-1:0] wr_addr;
  vec9_t wr_data;
  int checks = 0, failures = 0;
  int img [IMG_PIX], wgt [N_WEIGHTS];
  int fm [FM_WORDS];
  vec9_t wram [WRAM_WORDS];
  int n_fm = 0, n_wr = 0;

  ram_controller dut (.*);

  always @(posedge clk) begin
    rdata <= (rd_sel == 2'd0) ? data_t'(img[rd_addr % IMG_PIX]) : data_t'(wgt[rd_addr % N_WEIGHTS]);
    if (fm_we) begin fm[fm_waddr] = int'(fm_wdata); n_fm++; end
    if (wr_we) begin wram[wr_addr] = wr_data; n_wr++; end
  end

  initial begin #20ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic go(output int n);
    n = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); n++; end
    @(negedge clk);
  endtask

  initial begin
    int n;
    foreach (img[i]) img[i] = $urandom_range(255, 0);
    foreach (wgt[i]) wgt[i] = int'($urandom_range(4095, 0)) - 2048;
    repeat (2) @(negedge clk); rst_n = 1;
    // image load
    load_img = 1; layer = layer_cfg(0);
    go(n);
    checks++;
    if (n != IMG_PIX * 2 || n_fm != IMG_PIX) begin failures++; $display("image load %0d clocks %0d writes", n, n_fm); end
    foreach (img[i]) begin
      checks++;
      if (fm[i] != img[i] * 8) begin failures++; $display("pixel %0d", i); end
    end
    load_img = 0;
    for (int l = 0; l < N_LAYERS; l++) begin
      automatic layer_t L = layer_cfg(l);
      automatic int sets = int'(layer_sets(L));
      if (L.op == OP_POOL) continue;
      layer = L; n_wr = 0;
      go(n);
      checks++;
      if (n != sets * 18 || n_wr != sets) begin failures++; $display("layer %0d: %0d clocks %0d words", l, n, n_wr); end
      for (int s = 0; s < sets; s++)
        for (int k = 0; k < 9; k++) begin
          automatic int e;
          if (L.op == OP_DENSE) begin
            automatic int nb = (int'(L.size) + 8) / 9, o = s / nb, i = (s % nb) * 9 + k;
            e = (i < int'(L.size)) ? wgt[int'(L.wbase) + o * int'(L.size) + i] : 0;
          end else e = wgt[int'(L.wbase) + s * 9 + k];
          checks++;
          if (int'(wram[s][k]) != e) begin
            failures++;
            if (failures < 10) $display("layer %0d set %0d k %0d: %0d exp %0d", l, s, k, wram[s][k], e);
          end
        end
      $display("layer %0d: %0d sets in %0d clocks", l, sets, n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
