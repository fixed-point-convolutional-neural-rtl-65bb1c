// tb_dense_layer: the 16->11 dense layer (and a 20->5 shape with three
// blocks of nine, with ReLU) on random inputs and weights packed as the
// weight RAM holds them; outputs, saturation events and the clock count
// out*blocks*10 + 4 are checked against the reference.
`timescale 1ns/1ps
module tb_dense_layer;
  import lwdd_pkg::*;
  `include "tb/lwdd_ref.svh"
  logic clk = 0, rst_n = 0, start = 0, in_bank = 0;
  always #5 clk = ~clk;
  layer_t layer;
  logic busy, done, fm_we, cb_en, ovf_evt;
  logic [1:0] rd_sel;
  logic [WDB_AW-1:0] rd_addr;
  data_t rdata, fm_wdata;
  logic [FM_AW-1:0] fm_waddr;
  logic [WRAM_AW-1:0] w_raddr;
  vec9_t w_rdata, cb_p, cb_w;
  acc_t cb_sum;
  int checks = 0, failures = 0, n_ovf = 0;
  int bank [2][64];
  vec9_t wram [WRAM_WORDS];

  dense_layer dut (.*);

  always @(posedge clk) begin
    rdata   <= data_t'(bank[rd_sel[0]][rd_addr % 64]);
    w_rdata <= wram[w_raddr];
    if (fm_we) bank[~rd_sel[0]][fm_waddr % 64] = int'(fm_wdata);
    if (cb_en) begin
      automatic longint s = 0;
      for (int k = 0; k < 9; k++) s += longint'(cb_p[k]) * longint'(cb_w[k]);
      cb_sum <= acc_t'(s);
    end
    if (ovf_evt) n_ovf++;
  end

  initial begin #20ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(input int n_in, input int n_out, input bit relu, input int wscale, input int b);
    int inp[], wts[], outp[];
    int n = 0, nb = (n_in + 8) / 9, ovf0 = n_ovf;
    inp = new[n_in];
    wts = new[n_in * n_out];
    foreach (inp[i]) begin inp[i] = $urandom_range(2047, 0); bank[b][i] = inp[i]; end
    for (int i = n_in; i < 64; i++) bank[b][i] = 1234;   // must be ignored
    foreach (wts[i]) wts[i] = int'($urandom_range(2 * wscale, 0)) - wscale;
    for (int o = 0; o < n_out; o++)
      for (int bl = 0; bl < nb; bl++)
        for (int k = 0; k < 9; k++)
          wram[o*nb + bl][k] = (bl*9 + k < n_in) ? data_t'(wts[o*n_in + bl*9 + k]) : data_t'(0);
    ref_ovf_count = 0;
    ref_dense(inp, wts, n_in, n_out, outp);
    if (relu) foreach (outp[i]) if (outp[i] < 0) outp[i] = 0;
    layer = '{OP_DENSE, 6'(n_in), 5'd1, 5'(n_out), relu, 1'b0, 13'd0};
    in_bank = b[0];
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); n++; end
    checks++;
    if (n != n_out * nb * 10 + 4) begin failures++; $display("clocks %0d", n); end
    foreach (outp[i]) begin
      checks++;
      if (bank[1-b][i] != outp[i]) begin failures++; $display("out %0d: %0d exp %0d", i, bank[1-b][i], outp[i]); end
    end
    checks++;
    if (n_ovf - ovf0 != ref_ovf_count) begin failures++; $display("saturation events"); end
    $display("dense %0d->%0d: %0d clocks, %0d saturations", n_in, n_out, n, ref_ovf_count);
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 5; t++) run(16, 11, 1'b0, 1000, t % 2);
    run(16, 11, 1'b0, 2040, 0);
    run(20, 5, 1'b1, 800, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
