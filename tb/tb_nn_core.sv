// tb_nn_core: end-to-end test of the LWDD network accelerator against the
// behavioural reference model (lwdd_ref.svh). Random images and random
// per-layer-scaled weights are loaded; each inference's 11 logits, class and
// clock count are compared with the model and with the expected schedule.
// It also checks that saturation and zero-padding taps occurred. The last
// run uses 11-bit weights (lowest bit zero) on the 12-bit datapath.
`timescale 1ns/1ps
module tb_nn_core;
  import lwdd_pkg::*;
  `include "tb/lwdd_ref.svh"

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              img_we = 0, wgt_we = 0, start = 0;
  logic [9:0]        img_waddr = 0;
  logic [7:0]        img_wdata = 0;
  logic [WDB_AW-1:0] wgt_waddr = 0;
  data_t             wgt_wdata = 0;
  logic              busy, done, ovf_evt, edge_evt;
  logic [3:0]        class_id;
  data_t             class_score;
  phase_e            phase;

  nn_core dut (.*);

  int checks = 0, failures = 0;
  int ovf_seen = 0, edge_seen = 0;
  int img[], w[], logits[], cls;
  // Clocks from the edge that takes start to the edge that raises done.
  localparam int EXP_CYCLES = 247581;

  always @(posedge clk) if (rst_n) begin
    if (ovf_evt) ovf_seen++;
    if (edge_evt) edge_seen++;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic gen_weights(input int k);
    int base[10] = '{0, 36, 180, 468, 1044, 2196, 4500, 4676, 0, 0};
    int fan[7]   = '{9, 36, 36, 72, 72, 144, 16};
    w = new[N_WEIGHTS];
    for (int l = 0; l < 7; l++) begin
      int r = int'(real'(k) * 2048.0 / $sqrt(real'(fan[l])));
      // smaller dense weights keep most logits unsaturated, so the class
      // differs between images instead of resolving a tie at 2047
      if (l == 6) r = r / 8;
      for (int i = base[l]; i < base[l+1]; i++)
        w[i] = int'($urandom_range(2*r, 0)) - r;
    end
  endtask

  task automatic run_one(input int seed_img);
    longint t0, t1;
    img = new[784];
    for (int i = 0; i < 784; i++) begin
      // a bright field with a dark blob, plus noise
      int yy = i / 28, xx = i % 28;
      int d = (yy - 10 - seed_img % 8) ** 2 + (xx - 12 - seed_img % 5) ** 2;
      img[i] = (d < 30 ? 40 : 200) + int'($urandom_range(40, 0)) - 20;
      if (img[i] < 0) img[i] = 0;
      if (img[i] > 255) img[i] = 255;
    end
    @(negedge clk);
    for (int i = 0; i < 784; i++) begin
      img_we = 1; img_waddr = 10'(i); img_wdata = 8'(img[i]); @(negedge clk);
    end
    img_we = 0;
    ref_ovf_count = 0;
    ref_lwdd(img, w, logits, cls);
    start = 1; @(posedge clk); t0 = $time; @(negedge clk); start = 0;
    @(posedge done); t1 = $time;
    @(negedge clk);
    checks++;
    if (class_id != 4'(cls)) begin
      failures++; $display("class mismatch: got %0d exp %0d", class_id, cls);
    end
    for (int o = 0; o < 11; o++) begin
      checks++;
      if (int'(dut.u_db.fm1_mem[o]) != logits[o]) begin
        failures++;
        $display("logit %0d mismatch: got %0d exp %0d", o, dut.u_db.fm1_mem[o], logits[o]);
      end
    end
    checks++;
    if (int'(class_score) != logits[cls]) begin
      failures++; $display("score mismatch %0d %0d", class_score, logits[cls]);
    end
    checks++;
    if ((t1 - t0) / 10 != EXP_CYCLES) begin
      failures++; $display("cycle count %0d, expected %0d", (t1 - t0) / 10, EXP_CYCLES);
    end
    $display("inference: class %0d, %0d clocks, ref saturations %0d", class_id,
             (t1 - t0) / 10, ref_ovf_count);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    gen_weights(2);
    for (int i = 0; i < N_WEIGHTS; i++) begin
      wgt_we = 1; wgt_waddr = WDB_AW'(i); wgt_wdata = data_t'(w[i]); @(negedge clk);
    end
    wgt_we = 0;
    run_one(1);
    run_one(6);
    gen_weights(1);
    for (int i = 0; i < N_WEIGHTS; i++) begin
      wgt_we = 1; wgt_waddr = WDB_AW'(i); wgt_wdata = data_t'(w[i]); @(negedge clk);
    end
    wgt_we = 0;
    run_one(3);
    // 11-bit weights (10 fraction bits) are exact in the 12-bit format with
    // their lowest bit zero: the 12-bit build runs an 11-bit weight set.
    for (int i = 0; i < N_WEIGHTS; i++) w[i] = (w[i] / 2) * 2;
    for (int i = 0; i < N_WEIGHTS; i++) begin
      wgt_we = 1; wgt_waddr = WDB_AW'(i); wgt_wdata = data_t'(w[i]); @(negedge clk);
    end
    wgt_we = 0;
    run_one(4);
    checks++;
    if (ovf_seen == 0) begin failures++; $display("no saturation event seen"); end
    checks++;
    if (edge_seen == 0) begin failures++; $display("no border event seen"); end
    $display("saturation events %0d, border taps %0d", ovf_seen, edge_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
