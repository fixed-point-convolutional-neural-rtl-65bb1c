// tb_result_module: random sets of 11 scores (with ties) in a feature-map
// model; checks the argmax class, its score, the lowest-index tie rule, the
// bank select and the N_CLASSES+3 clock latency.
`timescale 1ns/1ps
module tb_result_module;
  import lwdd_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, in_bank = 0;
  always #5 clk = ~clk;
  logic busy, done;
  logic [1:0] rd_sel;
  logic [WDB_AW-1:0] rd_addr;
  data_t rdata, class_score;
  logic [3:0] class_id;
  int checks = 0, failures = 0;
  int mem [2][16];
  result_module dut (.*);

  always @(posedge clk) rdata <= data_t'(mem[rd_sel[0]][rd_addr[3:0]]);

  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic int best = 0, n = 0;
      automatic int b = $urandom_range(1, 0);
      for (int i = 0; i < 16; i++) begin
        mem[b][i] = int'($urandom_range(t % 3 == 0 ? 6 : 4000, 0)) - (t % 3 == 0 ? 3 : 2000);
        mem[1-b][i] = 5000;   // other bank: must not be read
      end
      for (int i = 1; i < 11; i++) if (mem[b][i] > mem[b][best]) best = i;
      in_bank = b[0];
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) begin @(negedge clk); n++; end
      checks += 3;
      if (int'(class_id) != best) begin failures++; $display("class %0d exp %0d", class_id, best); end
      if (int'(class_score) != mem[b][best]) begin failures++; $display("score"); end
      if (n != N_CLASSES + 2) begin failures++; $display("latency %0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
