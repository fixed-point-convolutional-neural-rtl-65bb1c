// lwdd_system: top level of the real-time digit recogniser: camera input,
// camera FIFO, image converter and the LWDD neural-network accelerator.
//
// Data path: camera_capture (camera clock cam_pclk) assembles RGB565
// pixels; the camera FIFO carries them, with their start-of-frame flag, to
// the system clock; image_converter crops, greys and downsizes each frame
// into the network's 28x28 image buffer; when a frame's image is complete
// and the network is idle the network is started on it, otherwise the frame
// is skipped (frames_dropped counts them). class_id/class_valid give the
// recognised class (0..9, 10 = no digit) of the last classified frame.
//
// The TFT display's SPI writer is included: bytes offered on disp_* are
// sent to the display pins tft_* (its reset pin follows rst_n).
// The trained weights are written once through wgt_we/wgt_waddr/wgt_wdata
// before the first frame. The camera's register setup (SIOC/SIOD), the
// SDRAM frame store, which would feed the camera picture to the display,
// is outside this top; the
// camera's PWDN pin is driven low (camera on) and its RESET pin follows
// rst_n. Timing assumption: the network copies the image out of its buffer
// in its first 1 570 clocks, well before the next frame's first converted
// pixel arrives (8 camera rows later), which an assertion checks.
// The block structure follows the paper's data-flow and network diagrams;
// taking the converter's input straight from the camera FIFO instead of
// from the SDRAM frame store is this design's simplification.
module lwdd_system
  import lwdd_pkg::*;
#(
  parameter int unsigned CAM_W = 320,
  parameter int unsigned CAM_H = 240,
  parameter int unsigned FIFO_AW = 9,
  parameter int unsigned SPI_HALF = 1   // clocks per display SCL half period
)(
  input  logic              clk,        // system clock
  input  logic              rst_n,
  // OV7670 camera
  input  logic              cam_pclk,
  input  logic              cam_vsync,
  input  logic              cam_href,
  input  logic [7:0]        cam_d,
  output logic              cam_pwdn,
  output logic              cam_reset_n,
  // weight load
  input  logic              wgt_we,
  input  logic [WDB_AW-1:0] wgt_waddr,
  input  data_t             wgt_wdata,
  // result
  output logic [3:0]        class_id,
  output logic              class_valid,
  output logic              nn_busy,
  output logic [15:0]       frames_done,
  output logic [15:0]       frames_dropped,
  output logic              fifo_ovf,
  output logic              sat_evt,
  output logic              border_evt,
  output logic              crop_evt,
  // TFT display: byte stream in, 4-wire SPI out
  input  logic              disp_valid,
  input  logic              disp_dc,
  input  logic [7:0]        disp_data,
  output logic              disp_ready,
  output logic              tft_cs,
  output logic              tft_dc,
  output logic              tft_sck,
  output logic              tft_sdi,
  output logic              tft_res_n
);
  // camera domain reset synchroniser
  logic cam_rst_q1, cam_rst_n;
  always_ff @(posedge cam_pclk or negedge rst_n)
    if (!rst_n) {cam_rst_n, cam_rst_q1} <= 2'b00;
    else        {cam_rst_n, cam_rst_q1} <= {cam_rst_q1, 1'b1};

  assign cam_pwdn    = 1'b0;
  assign cam_reset_n = rst_n;

  logic        pix_valid, pix_first;
  logic [15:0] pix_rgb;

  camera_capture u_cam (
    .pclk(cam_pclk), .rst_n(cam_rst_n), .vsync(cam_vsync), .href(cam_href),
    .d(cam_d), .pix_valid, .pix_first, .pix_rgb
  );

  logic        f_empty, f_full;
  logic [16:0] f_rdata;

  async_fifo #(.W(17), .AW(FIFO_AW)) u_cam_fifo (
    .wclk(cam_pclk), .wrst_n(cam_rst_n), .we(pix_valid), .wdata({pix_first, pix_rgb}),
    .full(f_full), .ovf(fifo_ovf),
    .rclk(clk), .rrst_n(rst_n), .re(!f_empty), .rdata(f_rdata), .empty(f_empty)
  );

  logic       img_we, frame_done;
  logic [9:0] img_waddr;
  logic [7:0] img_wdata;

  image_converter #(.IN_W(CAM_W), .IN_H(CAM_H)) u_conv (
    .clk, .rst_n, .in_valid(!f_empty), .in_first(f_rdata[16]), .in_rgb(f_rdata[15:0]),
    .img_we, .img_waddr, .img_wdata, .frame_done, .crop_evt
  );

  logic   nn_start, nn_done;
  data_t  class_score;
  phase_e phase;

  // Frame hand-off: start the network on a finished image if it is idle.
  assign nn_start = frame_done && !nn_busy;

  nn_core u_nn (
    .clk, .rst_n, .img_we, .img_waddr, .img_wdata, .wgt_we, .wgt_waddr, .wgt_wdata,
    .start(nn_start), .busy(nn_busy), .done(nn_done), .class_id, .class_score,
    .phase, .ovf_evt(sat_evt), .edge_evt(border_evt)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      class_valid <= 1'b0; frames_done <= '0; frames_dropped <= '0;
    end else begin
      if (nn_done) begin
        class_valid <= 1'b1;
        frames_done <= frames_done + 1'b1;
      end
      if (frame_done && nn_busy) frames_dropped <= frames_dropped + 1'b1;
    end
  end

  // Display output: command/data bytes from outside (the frame store that
  // would feed the picture is not part of this top) go out over SPI.
  assign tft_res_n = rst_n;

  display_spi #(.HALF(SPI_HALF)) u_disp (
    .clk, .rst_n, .in_valid(disp_valid), .in_dc(disp_dc), .in_data(disp_data),
    .in_ready(disp_ready), .csx(tft_cs), .dcx(tft_dc), .scl(tft_sck), .sda(tft_sdi)
  );

  // The image buffer must not be rewritten while the network copies it.
  assert property (@(posedge clk) disable iff (!rst_n) !(img_we && phase == PH_IMG));
endmodule
