// tb_lwdd_system: end-to-end test of the whole recogniser at its default
// sizes (320x240 camera frames, 28x28 network input, 12-bit words).
// A camera model drives VSYNC/HREF/PCLK/D with RGB565 frames (a dark blob
// on a bright noisy field, the blob moving between frames). Frames arrive
// faster than the network classifies them, so some are skipped. For every
// classified frame the testbench computes the expected 28x28 image (crop,
// grey formula, 8x8 averages) and the expected class with the reference
// model, and compares; it also checks the inference time and counts each
// mechanism: classification, frame skip, crop discard, saturation, border
// padding, display bytes sent over SPI.
`timescale 1ns/1ps
module tb_lwdd_system;
  import lwdd_pkg::*;
  `include "tb/lwdd_ref.svh"

  localparam int CW = 320, CH = 240, NFRAMES = 4;

  logic clk = 0, rst_n = 0, cam_pclk = 0;
  always #5 clk = ~clk;          // system clock
  always #3 cam_pclk = ~cam_pclk; // camera pixel clock

  logic              cam_vsync = 0, cam_href = 0;
  logic [7:0]        cam_d = 0;
  logic              cam_pwdn, cam_reset_n;
  logic              wgt_we = 0;
  logic [WDB_AW-1:0] wgt_waddr = 0;
  data_t             wgt_wdata = 0;
  logic [3:0]        class_id;
  logic              class_valid, nn_busy, fifo_ovf, sat_evt, border_evt, crop_evt;
  logic [15:0]       frames_done, frames_dropped;
  logic              disp_valid = 0, disp_dc = 0;
  logic [7:0]        disp_data = 0;
  logic              disp_ready, tft_cs, tft_dc, tft_sck, tft_sdi, tft_res_n;

  // display model: shifts sdi in on rising sck while cs is low
  int disp_rx [$], disp_tx [$], disp_bits = 0;
  logic [7:0] disp_sh = 0;
  always @(posedge tft_sck) if (!tft_cs) begin
    disp_sh = {disp_sh[6:0], tft_sdi}; disp_bits++;
    if (disp_bits % 8 == 0) disp_rx.push_back({23'b0, tft_dc, disp_sh});
  end

  lwdd_system dut (.*);

  int checks = 0, failures = 0;
  int n_sat = 0, n_border = 0, n_crop = 0, n_fifo_ovf = 0;
  int w[];
  int frame_img [NFRAMES][];   // expected 28x28 image of each frame
  int exp_cls [NFRAMES];
  int exp_logits [NFRAMES][];
  logic [15:0] pix [CH][CW];

  // Event monitors ignore the clocks before reset is released, when the
  // outputs still hold their power-up values.
  always @(posedge clk) if (rst_n) begin
    if (sat_evt) n_sat++;
    if (border_evt) n_border++;
    if (crop_evt) n_crop++;
  end
  always @(posedge cam_pclk) if (rst_n && fifo_ovf) n_fifo_ovf++;

  initial begin
    #40ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Build frame f and its expected network input.
  task automatic make_frame(input int f);
    int cy = 90 + 20 * f, cx = 130 + 15 * f;
    longint sum;
    for (int y = 0; y < CH; y++)
      for (int x = 0; x < CW; x++) begin
        int d2 = (y - cy) ** 2 + (x - cx) ** 2;
        int n = (x * 7 + y * 13 + f * 5 + x * y) % 8;   // deterministic noise
        int r = (d2 < 900) ? 4 : 26 + n % 6;
        int g = (d2 < 900) ? 8 : 52 + n;
        int b = (d2 < 900) ? 5 : 24 + n % 7;
        pix[y][x] = {5'(r), 6'(g), 5'(b)};
      end
    frame_img[f] = new[784];
    for (int by = 0; by < 28; by++)
      for (int bx = 0; bx < 28; bx++) begin
        sum = 0;
        for (int yy = 0; yy < 8; yy++)
          for (int xx = 0; xx < 8; xx++) begin
            logic [15:0] p = pix[8 + by*8 + yy][48 + bx*8 + xx];
            int r8 = int'(p[15:11]) * 8, g8 = int'(p[10:5]) * 4, b8 = int'(p[4:0]) * 8;
            sum += (8*g8 + 5*r8 + 3*b8) / 16;
          end
        frame_img[f][by*28 + bx] = int'(sum / 64);
      end
  endtask

  // Camera timing: VSYNC 3 lines, 17 lines before the first row, rows of
  // 640 byte clocks with 144 clocks of HREF low, 10 lines after the last.
  task automatic send_frame();
    @(negedge cam_pclk); cam_vsync = 1;
    repeat (3 * 784) @(negedge cam_pclk);
    cam_vsync = 0;
    repeat (17 * 784) @(negedge cam_pclk);
    for (int y = 0; y < CH; y++) begin
      for (int x = 0; x < CW; x++) begin
        cam_href = 1; cam_d = pix[y][x][15:8]; @(negedge cam_pclk);
        cam_d = pix[y][x][7:0]; @(negedge cam_pclk);
      end
      cam_href = 0; cam_d = 0;
      repeat (144) @(negedge cam_pclk);
    end
    repeat (10 * 784) @(negedge cam_pclk);
  endtask

  // Check each classification as it completes.
  int classified = 0;
  int accepted [$];
  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && dut.nn_start) begin
        automatic int f = -1;
        repeat (2) @(negedge clk);   // last pixel written
        // which frame: the one whose image is in the buffer now
        for (int k = 0; k < NFRAMES; k++) begin
          automatic bit same = 1;
          for (int i = 0; i < 784; i++)
            if (int'(dut.u_nn.u_db.img_mem[i]) != frame_img[k][i]) same = 0;
          if (same) f = k;
        end
        checks++;
        if (f < 0) begin failures++; $display("converted image matches no frame"); end
        else accepted.push_back(f);
      end
    end
  end

  initial begin
    longint t0;
    int logits[], cls;
    forever begin
      @(posedge clk);
      // Both signals are read just before the edge updates them: t0 is the
      // edge that samples nn_start, and done is seen one edge after the
      // edge that raises it, hence 247 581 + 1.
      if (rst_n && dut.nn_start) t0 = $time;
      if (rst_n && dut.u_nn.done) begin
        checks++;
        if (($time - t0) / 10 != 247581 + 1) begin
          failures++; $display("inference took %0d clocks", ($time - t0) / 10);
        end
        @(negedge clk);
        checks++;
        if (accepted.size() > classified) begin
          automatic int f = accepted[classified];
          for (int o = 0; o < 11; o++) begin
            checks++;
            if (int'(dut.u_nn.u_db.fm1_mem[o]) != exp_logits[f][o]) begin
              failures++; $display("frame %0d logit %0d: %0d, expected %0d", f, o,
                                   dut.u_nn.u_db.fm1_mem[o], exp_logits[f][o]);
            end
          end
          if (class_id != 4'(exp_cls[f]) || !class_valid) begin
            failures++; $display("frame %0d: class %0d, expected %0d", f, class_id, exp_cls[f]);
          end else $display("frame %0d classified as %0d", f, class_id);
        end else failures++;
        classified++;
      end
    end
  end

  initial begin
    int logits[];
    // weights
    automatic int base[8] = '{0, 36, 180, 468, 1044, 2196, 4500, 4676};
    automatic int fan[7]  = '{9, 36, 36, 72, 72, 144, 16};
    w = new[N_WEIGHTS];
    for (int l = 0; l < 7; l++) begin
      automatic int r = int'(2.0 * 2048.0 / $sqrt(real'(fan[l])));
      if (l == 6) r = r / 8;   // keep the logits mostly unsaturated
      for (int i = base[l]; i < base[l+1]; i++) w[i] = int'($urandom_range(2*r, 0)) - r;
    end
    for (int f = 0; f < NFRAMES; f++) begin
      make_frame(f);
      ref_lwdd(frame_img[f], w, logits, exp_cls[f]);
      exp_logits[f] = logits;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    checks++;
    if (cam_pwdn !== 1'b0 || cam_reset_n !== 1'b1) begin
      failures++; $display("camera control pins wrong");
    end
    for (int i = 0; i < N_WEIGHTS; i++) begin
      wgt_we = 1; wgt_waddr = WDB_AW'(i); wgt_wdata = data_t'(w[i]); @(negedge clk);
    end
    wgt_we = 0;
    // a command byte and its parameters for the display
    for (int i = 0; i < 5; i++) begin
      disp_valid = 1; disp_dc = (i != 0); disp_data = 8'($urandom);
      disp_tx.push_back({23'b0, disp_dc, disp_data});
      do @(posedge clk); while (!disp_ready);
      @(negedge clk);
    end
    disp_valid = 0;
    for (int f = 0; f < NFRAMES; f++) begin
      make_frame(f);
      send_frame();
    end
    wait (!nn_busy);
    repeat (10) @(negedge clk);
    checks++;
    if (frames_done != 16'(classified) || classified < 2) begin
      failures++; $display("frames classified %0d (counter %0d)", classified, frames_done);
    end
    checks++;
    if (frames_dropped == 0) begin failures++; $display("no frame was skipped"); end
    checks++;
    if (int'(frames_done) + int'(frames_dropped) != NFRAMES) begin
      failures++; $display("frames done %0d + dropped %0d != %0d", frames_done, frames_dropped, NFRAMES);
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("no saturation"); end
    checks++;
    if (n_border == 0) begin failures++; $display("no border taps"); end
    checks++;
    if (n_crop != NFRAMES * (CW * CH - 224 * 224)) begin
      failures++; $display("crop discards %0d", n_crop);
    end
    checks++;
    if (disp_rx != disp_tx || tft_res_n !== 1'b1) begin
      failures++; $display("display received %0d of %0d bytes correctly", disp_rx.size(), disp_tx.size());
    end
    checks++;
    if (n_fifo_ovf != 0) begin failures++; $display("camera FIFO overflowed"); end
    $display("classified %0d, skipped %0d, saturations %0d, border taps %0d, crop discards %0d, display bytes %0d",
             frames_done, frames_dropped, n_sat, n_border, n_crop, disp_rx.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
