// tb_maxpool_layer: random signed feature maps of the two LWDD pooling
// shapes; every pooled word is compared with the reference pooling, and the
// clock count with in_ch*(size/2)^2*4 + 3.
`timescale 1ns/1ps
module tb_maxpool_layer;
  import lwdd_pkg::*;
  `include "tb/lwdd_ref.svh"
  logic clk = 0, rst_n = 0, start = 0, in_bank = 0;
  always #5 clk = ~clk;
  layer_t layer;
  logic busy, done, fm_we;
  logic [1:0] rd_sel;
  logic [WDB_AW-1:0] rd_addr;
  data_t rdata, fm_wdata;
  logic [FM_AW-1:0] fm_waddr;
  int checks = 0, failures = 0;
  int bank [2][FM_WORDS];

  maxpool_layer dut (.*);

  always @(posedge clk) begin
    rdata <= data_t'(bank[rd_sel[0]][rd_addr % FM_WORDS]);
    if (fm_we) bank[~rd_sel[0]][fm_waddr] = int'(fm_wdata);
  end

  initial begin #20ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(input int size, input int ch, input int b);
    int inp[], outp[];
    int n = 0;
    inp = new[ch * size * size];
    foreach (inp[i]) begin inp[i] = int'($urandom_range(4095, 0)) - 2048; bank[b][i] = inp[i]; end
    ref_pool(inp, size, ch, outp);
    layer = '{OP_POOL, 6'(size), 5'(ch), 5'(ch), 1'b0, 1'b0, 13'd0};
    in_bank = b[0];
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); n++; end
    checks++;
    if (n != ch * (size / 2) * (size / 2) * 4 + 3) begin failures++; $display("clocks %0d", n); end
    foreach (outp[i]) begin
      checks++;
      if (bank[1-b][i] != outp[i]) begin
        failures++;
        if (failures < 10) $display("out %0d: %0d exp %0d", i, bank[1-b][i], outp[i]);
      end
    end
    $display("pool %0dx%0dx%0d: %0d clocks", size, size, ch, n);
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(28, 4, 0);
    run(14, 8, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
