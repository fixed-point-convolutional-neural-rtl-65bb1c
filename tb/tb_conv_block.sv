// tb_conv_block: random and corner-case vectors through the 3x3 dot-product
// block; the registered sum is compared with a sum computed here.
`timescale 1ns/1ps
module tb_conv_block;
  import lwdd_pkg::*;
  logic clk = 0, en = 0;
  always #5 clk = ~clk;
  vec9_t p, w;
  acc_t  sum;
  int checks = 0, failures = 0;
  conv_block dut (.*);

  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    longint exp;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      for (int k = 0; k < 9; k++) begin
        case (t)
          0: begin p[k] = data_t'(-2048); w[k] = data_t'(-2048); end
          1: begin p[k] = data_t'(2047);  w[k] = data_t'(-2048); end
          default: begin p[k] = data_t'($urandom); w[k] = data_t'($urandom); end
        endcase
      end
      exp = 0;
      for (int k = 0; k < 9; k++) exp += longint'(p[k]) * longint'(w[k]);
      en = 1;
      @(negedge clk);
      en = 0;
      checks++;
      if (longint'(sum) != exp) begin failures++; $display("t=%0d sum %0d exp %0d", t, sum, exp); end
      // hold when en is low
      p[0] = ~p[0];
      @(negedge clk);
      checks++;
      if (longint'(sum) != exp) begin failures++; $display("sum changed with en low"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
