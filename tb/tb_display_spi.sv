// tb_display_spi: sends random command/data bytes through the SPI display
// writer, some back to back and some with idle gaps, and checks what a
// display would receive: a display model samples sda on every rising scl
// edge while csx is low and D/CX with the eighth bit. Checked: every byte
// and its D/CX flag in order, MSB-first bit order, 16*HALF clocks per byte,
// csx held low across back-to-back bytes and raised after a gap, and scl
// idle low while csx is high. Runs at HALF = 1 and HALF = 3.
`timescale 1ns/1ps
module tb_display_spi;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one writer per HALF setting, sharing the checking code
  logic       v1 = 0, d1 = 0, v3 = 0, d3 = 0;
  logic [7:0] b1 = 0, b3 = 0;
  logic       r1, cs1, dc1, sc1, sd1, r3, cs3, dc3, sc3, sd3;

  display_spi #(.HALF(1)) u1 (.clk, .rst_n, .in_valid(v1), .in_dc(d1), .in_data(b1),
                              .in_ready(r1), .csx(cs1), .dcx(dc1), .scl(sc1), .sda(sd1));
  display_spi #(.HALF(3)) u3 (.clk, .rst_n, .in_valid(v3), .in_dc(d3), .in_data(b3),
                              .in_ready(r3), .csx(cs3), .dcx(dc3), .scl(sc3), .sda(sd3));

  // display models
  int rx1 [$], rx3 [$];
  int nb1 = 0, nb3 = 0, cs_rise1 = 0, cs_rise3 = 0;
  logic [7:0] s1 = 0, s3 = 0;
  always @(posedge sc1) if (!cs1) begin
    s1 = {s1[6:0], sd1}; nb1++;
    if (nb1 % 8 == 0) rx1.push_back({23'b0, dc1, s1});
  end
  always @(posedge sc3) if (!cs3) begin
    s3 = {s3[6:0], sd3}; nb3++;
    if (nb3 % 8 == 0) rx3.push_back({23'b0, dc3, s3});
  end
  always @(posedge cs1) if (rst_n) cs_rise1++;
  always @(posedge cs3) if (rst_n) cs_rise3++;
  int bad_idle = 0;
  always @(negedge clk) if (rst_n && ((cs1 && sc1) || (cs3 && sc3))) bad_idle++;

  int sent1 [$], sent3 [$];

  // Send n bytes on writer 1 (h = 1) or 3, back to back or each after the
  // previous one has finished.
  task automatic send(input int h, input int n, input bit b2b, output int clocks);
    int t0 = -1, t = 0;
    for (int i = 0; i < n; i++) begin
      automatic logic [7:0] b = 8'($urandom);
      automatic logic       d = 1'($urandom);
      if (h == 1) begin v1 = 1; b1 = b; d1 = d; sent1.push_back({23'b0, d, b}); end
      else        begin v3 = 1; b3 = b; d3 = d; sent3.push_back({23'b0, d, b}); end
      forever begin
        @(posedge clk); t++;
        if ((h == 1 && r1) || (h == 3 && r3)) break;
      end
      if (t0 < 0) t0 = t;
      @(negedge clk);
      v1 = 0; v3 = 0;
      if (!b2b) repeat (16 * h + 8) @(negedge clk);
    end
    // wait for the last byte to finish
    forever begin
      @(posedge clk); t++;
      if ((h == 1 && r1) || (h == 3 && r3)) break;
    end
    clocks = t - t0;
  endtask

  initial begin
    int clocks, rises;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    // back-to-back bursts: csx must stay low through the whole burst
    for (int h = 1; h <= 3; h += 2) begin
      rises = (h == 1) ? cs_rise1 : cs_rise3;
      send(h, 10, 1, clocks);
      repeat (4) @(negedge clk);
      checks++;
      if (clocks != 10 * 16 * h) begin
        failures++; $display("HALF=%0d: burst of 10 bytes took %0d clocks", h, clocks);
      end
      checks++;
      if (((h == 1) ? cs_rise1 : cs_rise3) != rises + 1) begin
        failures++; $display("HALF=%0d: csx rose %0d times in a burst", h,
                             ((h == 1) ? cs_rise1 : cs_rise3) - rises);
      end
      // separate bytes: csx goes high after each
      rises = (h == 1) ? cs_rise1 : cs_rise3;
      send(h, 12, 0, clocks);
      repeat (4) @(negedge clk);
      checks++;
      if (((h == 1) ? cs_rise1 : cs_rise3) != rises + 12) begin
        failures++; $display("HALF=%0d: csx rose %0d times for 12 single bytes", h,
                             ((h == 1) ? cs_rise1 : cs_rise3) - rises);
      end
    end
    repeat (10) @(negedge clk);
    checks += 2;
    if (rx1.size() != sent1.size()) begin failures++; $display("HALF=1: %0d bytes received", rx1.size()); end
    if (rx3.size() != sent3.size()) begin failures++; $display("HALF=3: %0d bytes received", rx3.size()); end
    for (int i = 0; i < sent1.size() && i < rx1.size(); i++) begin
      checks++;
      if (rx1[i] != sent1[i]) begin failures++; $display("HALF=1 byte %0d: %h, expected %h", i, rx1[i], sent1[i]); end
    end
    for (int i = 0; i < sent3.size() && i < rx3.size(); i++) begin
      checks++;
      if (rx3[i] != sent3[i]) begin failures++; $display("HALF=3 byte %0d: %h, expected %h", i, rx3[i], sent3[i]); end
    end
    checks++;
    if (bad_idle != 0) begin failures++; $display("scl active while csx high: %0d", bad_idle); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
