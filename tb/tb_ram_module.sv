// tb_ram_module: writes random 9-weight words to every address, reads them
// back in random order and checks data and the one-clock read latency.
`timescale 1ns/1ps
module tb_ram_module;
  import lwdd_pkg::*;
  logic clk = 0, we = 0;
  always #5 clk = ~clk;
  logic [WRAM_AW-1:0] waddr = 0, raddr = 0;
  vec9_t wdata, rdata;
  vec9_t model [WRAM_WORDS];
  int checks = 0, failures = 0;
  ram_module dut (.*);

  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int a = 0; a < WRAM_WORDS; a++) begin
      @(negedge clk);
      for (int k = 0; k < 9; k++) wdata[k] = data_t'($urandom);
      we = 1; waddr = WRAM_AW'(a); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 600; t++) begin
      automatic int a = $urandom_range(WRAM_WORDS - 1, 0);
      raddr = WRAM_AW'(a);
      @(negedge clk);
      checks++;
      if (rdata != model[a]) begin failures++; $display("addr %0d mismatch", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
