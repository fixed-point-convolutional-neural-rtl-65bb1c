// tb_image_converter: streams two 320x240 RGB565 frames (random pixels,
// with idle gaps) into the converter and checks all 784 output pixels of
// each frame against crop + grey formula + 8x8 averaging computed here,
// their addresses, the single frame_done per frame and the crop discards.
`timescale 1ns/1ps
module tb_image_converter;
  localparam int IW = 320, IH = 240;
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0;
  always #5 clk = ~clk;
  logic [15:0] in_rgb = 0;
  logic img_we, frame_done, crop_evt;
  logic [9:0] img_waddr;
  logic [7:0] img_wdata;
  int checks = 0, failures = 0, n_crop = 0, n_done = 0, n_wr = 0;
  int got [784];
  int expv [784];

  image_converter dut (.*);

  // Monitors ignore the clocks before reset is released.
  always @(posedge clk) if (rst_n) begin
    if (img_we) begin got[img_waddr] = int'(img_wdata); n_wr++; end
    if (frame_done) n_done++;
    if (crop_evt) n_crop++;
  end

  initial begin #50ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic frame(input int seed);
    longint sum [28][28];
    for (int i = 0; i < 28; i++) for (int j = 0; j < 28; j++) sum[i][j] = 0;
    n_wr = 0; n_done = 0;
    for (int y = 0; y < IH; y++)
      for (int x = 0; x < IW; x++) begin
        automatic logic [15:0] p = 16'($urandom);
        if (y >= 8 && y < 232 && x >= 48 && x < 272) begin
          automatic int r8 = int'(p[15:11]) * 8, g8 = int'(p[10:5]) * 4, b8 = int'(p[4:0]) * 8;
          sum[(y - 8) / 8][(x - 48) / 8] += (8 * g8 + 5 * r8 + 3 * b8) / 16;
        end
        @(negedge clk);
        in_valid = 1; in_first = (x == 0 && y == 0); in_rgb = p;
        if ($urandom_range(9, 0) == 0) begin
          @(negedge clk); in_valid = 0; in_first = 0;
        end
      end
    @(negedge clk); in_valid = 0; in_first = 0;
    repeat (3) @(negedge clk);
    for (int i = 0; i < 784; i++) expv[i] = int'(sum[i / 28][i % 28] / 64);
    checks += 2;
    if (n_wr != 784) begin failures++; $display("writes %0d", n_wr); end
    if (n_done != 1) begin failures++; $display("frame_done %0d", n_done); end
    for (int i = 0; i < 784; i++) begin
      checks++;
      if (got[i] != expv[i]) begin
        failures++;
        if (failures < 10) $display("pixel %0d: %0d exp %0d", i, got[i], expv[i]);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    frame(1);
    frame(2);
    checks++;
    if (n_crop != 2 * (IW * IH - 224 * 224)) begin failures++; $display("crop discards %0d", n_crop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
