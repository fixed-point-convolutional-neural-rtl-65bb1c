// tb_conv_layer: runs the convolution unit on several layer shapes (with and
// without ReLU, with GlobalMaxPooling) against the reference convolution.
// The testbench models the feature-map banks, the weight RAM and the
// convolution block around the unit; it checks every output word, the
// saturation events and the clock count out_ch*in_ch*size*(size+1)*4 + 3.
`timescale 1ns/1ps
module tb_conv_layer;
  import lwdd_pkg::*;
  `include "tb/lwdd_ref.svh"
  logic clk = 0, rst_n = 0, start = 0, in_bank = 0;
  always #5 clk = ~clk;
  layer_t layer;
  logic busy, done, fm_we, cb_en, ovf_evt, edge_evt;
  logic [1:0] rd_sel;
  logic [WDB_AW-1:0] rd_addr;
  data_t rdata, fm_wdata;
  logic [FM_AW-1:0] fm_waddr;
  logic [WRAM_AW-1:0] w_raddr;
  vec9_t w_rdata, cb_p, cb_w;
  acc_t cb_sum;
  int checks = 0, failures = 0, n_ovf = 0;
  int bank [2][FM_WORDS];
  vec9_t wram [WRAM_WORDS];

  conv_layer dut (.*);

  // memory and convolution-block models
  always @(posedge clk) begin
    rdata   <= data_t'(bank[rd_sel[0]][rd_addr % FM_WORDS]);
    w_rdata <= wram[w_raddr];
    if (fm_we) bank[~rd_sel[0]][fm_waddr] = int'(fm_wdata);
    if (cb_en) begin
      automatic longint s = 0;
      for (int k = 0; k < 9; k++) s += longint'(cb_p[k]) * longint'(cb_w[k]);
      cb_sum <= acc_t'(s);
    end
    if (ovf_evt) n_ovf++;
  end

  initial begin #20ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(input int size, input int ic_n, input int oc_n, input bit relu,
                     input bit gmp, input int wscale, input int b);
    int inp[], wts[], outp[], g[];
    int n = 0, ovf0;
    inp = new[ic_n * size * size];
    wts = new[ic_n * oc_n * 9];
    foreach (inp[i]) inp[i] = relu ? $urandom_range(2047, 0) : int'($urandom_range(4095, 0)) - 2048;
    foreach (wts[i]) wts[i] = int'($urandom_range(2 * wscale, 0)) - wscale;
    foreach (inp[i]) bank[b][i] = inp[i];
    for (int s = 0; s < oc_n * ic_n; s++)
      for (int k = 0; k < 9; k++) wram[s][k] = data_t'(wts[s*9 + k]);
    layer = '{OP_CONV, 6'(size), 5'(ic_n), 5'(oc_n), relu, gmp, 13'd0};
    in_bank = b[0];
    ref_ovf_count = 0;
    ref_conv(inp, wts, size, ic_n, oc_n, relu, outp);
    ovf0 = n_ovf;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); n++; end
    checks++;
    if (n != oc_n * ic_n * size * (size + 1) * 4 + 3) begin
      failures++; $display("clocks %0d", n);
    end
    if (gmp) begin
      ref_gmp(outp, size, oc_n, g);
      for (int o = 0; o < oc_n; o++) begin
        checks++;
        if (bank[1-b][o] != g[o]) begin failures++; $display("gmp %0d: %0d exp %0d", o, bank[1-b][o], g[o]); end
      end
    end else begin
      foreach (outp[i]) begin
        checks++;
        if (bank[1-b][i] != outp[i]) begin
          failures++;
          if (failures < 10) $display("out %0d: %0d exp %0d", i, bank[1-b][i], outp[i]);
        end
      end
    end
    checks++;
    if (n_ovf - ovf0 != ref_ovf_count) begin
      failures++; $display("saturations %0d exp %0d", n_ovf - ovf0, ref_ovf_count);
    end
    $display("conv %0dx%0d %0d->%0d relu=%0d gmp=%0d: %0d clocks, %0d saturations",
             size, size, ic_n, oc_n, relu, gmp, n, ref_ovf_count);
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(7, 3, 2, 1, 0, 700, 0);
    run(5, 2, 3, 0, 0, 1500, 1);     // no ReLU, strong weights: saturation
    run(7, 4, 3, 1, 1, 500, 0);      // GlobalMaxPooling
    run(28, 1, 2, 1, 0, 900, 1);
    checks++;
    if (n_ovf == 0) begin failures++; $display("no saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
