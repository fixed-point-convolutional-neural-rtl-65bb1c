// tb_border_control: sweeps every tap of every map size the network uses and
// compares the in-image flag and the address with direct arithmetic.
`timescale 1ns/1ps
module tb_border_control;
  import lwdd_pkg::*;
  logic [5:0] size, y;
  logic [4:0] ch;
  logic [1:0] dy;
  logic [6:0] x;
  logic in_img;
  logic [FM_AW-1:0] addr;
  int checks = 0, failures = 0;
  border_control dut (.*);

  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int sizes[3] = '{28, 14, 7};
    foreach (sizes[si]) begin
      automatic int s = sizes[si];
      for (int c = 0; c < 3; c++)
        for (int yy = 0; yy < s; yy++)
          for (int d = 0; d < 3; d++)
            for (int xx = 0; xx <= s; xx++) begin
              automatic int row = yy + d - 1;
              automatic bit exp_in = (row >= 0 && row < s && xx < s);
              size = 6'(s); ch = 5'(c); y = 6'(yy); dy = 2'(d); x = 7'(xx);
              #1;
              checks++;
              if (in_img != exp_in) begin failures++; $display("flag s%0d y%0d d%0d x%0d", s, yy, d, xx); end
              if (exp_in) begin
                checks++;
                if (int'(addr) != c*s*s + row*s + xx) begin failures++; $display("addr"); end
              end
            end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
