// tb_camera_capture: drives frames of random RGB565 bytes with VSYNC/HREF
// timing (including a row cut short, an odd byte count) and checks every
// assembled pixel, the first-pixel flag and the pixel count.
`timescale 1ns/1ps
module tb_camera_capture;
  logic pclk = 0, rst_n = 0, vsync = 0, href = 0;
  logic [7:0] d = 0;
  always #5 pclk = ~pclk;
  logic pix_valid, pix_first;
  logic [15:0] pix_rgb;
  int checks = 0, failures = 0;
  logic [15:0] exp_q [$];
  bit first_q [$];

  camera_capture dut (.*);

  always @(posedge pclk) if (pix_valid) begin
    checks += 2;
    if (exp_q.size() == 0) begin failures++; $display("extra pixel"); end
    else begin
      automatic logic [15:0] e = exp_q.pop_front();
      automatic bit f = first_q.pop_front();
      if (pix_rgb != e) begin failures++; $display("pixel %h exp %h", pix_rgb, e); end
      if (pix_first != f) begin failures++; $display("first flag"); end
    end
  end

  initial begin #5ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic frame(input int rows, input int cols, input bit glitch);
    @(negedge pclk); vsync = 1; repeat (6) @(negedge pclk); vsync = 0;
    repeat (10) @(negedge pclk);
    for (int r = 0; r < rows; r++) begin
      for (int c = 0; c < cols; c++) begin
        automatic logic [15:0] p = 16'($urandom);
        exp_q.push_back(p); first_q.push_back(r == 0 && c == 0);
        href = 1; d = p[15:8]; @(negedge pclk); d = p[7:0]; @(negedge pclk);
      end
      if (glitch && r == 1) begin d = 8'hA5; @(negedge pclk); end   // stray odd byte
      href = 0; repeat (5) @(negedge pclk);
    end
  endtask

  initial begin
    repeat (2) @(negedge pclk); rst_n = 1;
    frame(4, 9, 0);
    frame(5, 6, 1);
    frame(3, 3, 0);
    repeat (5) @(negedge pclk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d pixels missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
