// tb_shift_window: shifts random columns into the window and checks the
// 3x3 contents against a model; checks clear and hold.
`timescale 1ns/1ps
module tb_shift_window;
  import lwdd_pkg::*;
  logic clk = 0, clr = 0, shift = 0;
  always #5 clk = ~clk;
  data_t col [3];
  vec9_t win;
  int checks = 0, failures = 0;
  int m [3][3];
  shift_window dut (.*);

  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic cmp();
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) begin
      checks++;
      if (int'(win[r*3+c]) != m[r][c]) begin
        failures++; $display("win[%0d][%0d]=%0d exp %0d", r, c, win[r*3+c], m[r][c]);
      end
    end
  endtask

  initial begin
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) m[r][c] = 0;
    cmp();
    for (int t = 0; t < 200; t++) begin
      automatic bit sh = ($urandom_range(3, 0) != 0);
      for (int r = 0; r < 3; r++) col[r] = data_t'($urandom);
      shift = sh;
      if (t == 100) clr = 1;
      @(negedge clk);
      if (t == 100) begin
        for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) m[r][c] = 0;
      end else if (sh) begin
        for (int r = 0; r < 3; r++) begin
          m[r][0] = m[r][1]; m[r][1] = m[r][2]; m[r][2] = int'(col[r]);
        end
      end
      shift = 0; clr = 0;
      cmp();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
