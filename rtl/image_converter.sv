// image_converter: turns the 320x240 RGB565 camera frame into the 28x28
// 8-bit grey image the network classifies, on the fly, one pixel per clock.
//
// 1. Crop: only the central 224x224 pixels are used (columns 48..271,
//    rows 8..231); 224 = 28*8 makes the next step exact.
// 2. Grey: with the 5/6/5-bit channels widened to 8 bits (R<<3, G<<2,
//    B<<3), BW = (8*G + 5*R + 3*B) / 16. The weights sum to 16, so the
//    division is a 4-bit shift and the result stays 8 bits; 8*G is a shift.
// 3. Downscale: the crop is split into 8x8 blocks; each block's 64 grey
//    values are summed in one of 28 column accumulators and the average
//    (sum / 64, truncated) becomes one output pixel, written when the
//    block's last pixel (bottom-right) arrives.
// Interface: in_valid/in_first/in_rgb is the pixel stream (in_first marks a
// frame's first pixel and restarts the counters). img_we/img_waddr/
// img_wdata write the output image, address y*28+x; frame_done pulses with
// the last write of a frame. Crop, formula and block averaging follow the
// paper; channel widening and truncation are this design's choice.
module image_converter #(
  parameter int unsigned IN_W = 320,
  parameter int unsigned IN_H = 240,
  parameter int unsigned CROP = 224,
  parameter int unsigned BLK  = 8
)(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_first,
  input  logic [15:0] in_rgb,
  output logic        img_we,
  output logic [9:0]  img_waddr,
  output logic [7:0]  img_wdata,
  output logic        frame_done,
  output logic        crop_evt      // a pixel outside the crop was discarded
);
  localparam int unsigned OUT = CROP / BLK;
  localparam int unsigned X0  = (IN_W - CROP) / 2;
  localparam int unsigned Y0  = (IN_H - CROP) / 2;
  localparam int unsigned SW  = 8 + 2 * $clog2(BLK);   // block-sum width
  localparam int unsigned XW  = $clog2(OUT);            // accumulator index width

  logic [9:0]    x, y, px, py;
  logic [SW-1:0] acc [OUT];
  logic [7:0]    r8, g8, b8;
  logic [11:0]   wsum;
  logic [7:0]    bw;
  logic          in_crop;
  logic [9:0]    cx, cy;
  logic [9:0]    bx, by;
  logic [SW-1:0] bsum;

  always_comb begin
    px = in_first ? 10'd0 : x;
    py = in_first ? 10'd0 : y;
    r8 = {in_rgb[15:11], 3'b000};
    g8 = {in_rgb[10:5],  2'b00};
    b8 = {in_rgb[4:0],   3'b000};
    wsum = ({4'b0, g8} << 3) + 12'(5 * int'(r8)) + 12'(3 * int'(b8));
    bw   = wsum[11:4];
    in_crop = (px >= 10'(X0)) && (px < 10'(X0 + CROP)) &&
              (py >= 10'(Y0)) && (py < 10'(Y0 + CROP));
    cx = px - 10'(X0);
    cy = py - 10'(Y0);
    bx = cx / 10'(BLK);
    by = cy / 10'(BLK);
    bsum = acc[bx < 10'(OUT) ? XW'(bx) : XW'(0)] + SW'(bw);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0; img_we <= 1'b0; img_waddr <= '0; img_wdata <= '0;
      frame_done <= 1'b0; crop_evt <= 1'b0;
      for (int i = 0; i < int'(OUT); i++) acc[i] <= '0;
    end else begin
      img_we     <= 1'b0;
      frame_done <= 1'b0;
      crop_evt   <= 1'b0;
      if (in_valid) begin
        if (px == 10'(IN_W - 1)) begin
          x <= '0;
          y <= py + 1'b1;
        end else begin
          x <= px + 1'b1;
          y <= py;
        end
        if (in_first)
          for (int i = 0; i < int'(OUT); i++) acc[i] <= '0;
        if (!in_crop) begin
          crop_evt <= 1'b1;
        end else if (cy % 10'(BLK) == 10'(BLK - 1) && cx % 10'(BLK) == 10'(BLK - 1)) begin
          img_we    <= 1'b1;
          img_waddr <= 10'(by * 10'(OUT) + bx);
          img_wdata <= 8'(bsum >> (2 * $clog2(BLK)));
          acc[XW'(bx)] <= '0;
          frame_done <= (bx == 10'(OUT - 1)) && (by == 10'(OUT - 1));
        end else begin
          acc[XW'(bx)] <= bsum;
        end
      end
    end
  end
endmodule
