// camera_capture: receives the OV7670 camera's 8-bit parallel video in
// RGB565 and turns byte pairs into 16-bit pixels.
//
// While HREF is high each PCLK carries one byte of the current row; a pixel
// is two bytes: first byte D[7:3] = R[4:0], D[2:0] = G[5:3]; second byte
// D[7:5] = G[2:0], D[4:0] = B[4:0]. VSYNC marks a new frame; the first pixel
// after it is flagged with pix_first so that later stages can restart their
// row/column counters. The byte phase restarts at every rising HREF, so a
// lost byte never shifts more than one row.
//
// Interface: all inputs sampled on the rising edge of pclk; pix_valid pulses
// for one pclk with pix_rgb and pix_first. Pixel rate is half the byte rate
// (two clocks per colour pixel). Byte packing, the two-clock pixel and the
// VSYNC/HREF strobes follow the paper and its camera figures; the active
// levels (VSYNC high = sync, HREF high = row data) and the rising-edge
// sampling are this design's reading of the camera's default timing.
module camera_capture (
  input  logic        pclk,
  input  logic        rst_n,
  input  logic        vsync,
  input  logic        href,
  input  logic [7:0]  d,
  output logic        pix_valid,
  output logic        pix_first,
  output logic [15:0] pix_rgb
);
  logic       phase;      // 0: expecting first byte, 1: second byte
  logic [7:0] first_b;
  logic       new_frame;  // VSYNC seen, next pixel is the frame's first

  always_ff @(posedge pclk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= 1'b0; first_b <= '0; new_frame <= 1'b0;
      pix_valid <= 1'b0; pix_first <= 1'b0; pix_rgb <= '0;
    end else begin
      pix_valid <= 1'b0;
      if (vsync) begin
        new_frame <= 1'b1;
        phase     <= 1'b0;
      end else if (!href) begin
        phase <= 1'b0;
      end else if (!phase) begin
        first_b <= d;
        phase   <= 1'b1;
      end else begin
        phase     <= 1'b0;
        pix_valid <= 1'b1;
        pix_rgb   <= {first_b, d};
        pix_first <= new_frame;
        new_frame <= 1'b0;
      end
    end
  end
endmodule
