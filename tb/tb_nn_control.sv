// tb_nn_control: the control module against models of the units that answer
// each start pulse with a done pulse after a random delay. Checks the stage
// sequence of one LWDD inference (image load, weight load before every conv
// and dense layer, no weight load before pooling, result last), the layer
// parameters and input bank of every stage, single-clock start pulses, and
// busy/done. Two inferences are run back to back.
`timescale 1ns/1ps
module tb_nn_control;
  import lwdd_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  logic busy, done, in_bank, rc_start, rc_img, conv_start, pool_start, dense_start, res_start;
  logic rc_done = 0, conv_done = 0, pool_done = 0, dense_done = 0, res_done = 0;
  phase_e phase;
  layer_t layer;
  int checks = 0, failures = 0;

  nn_control dut (.*);

  typedef struct { phase_e ph; int li; } stage_t;
  stage_t exp_q [$];
  int got = 0;

  // unit models
  initial forever begin
    @(posedge clk);
    if (rc_start | conv_start | pool_start | dense_start | res_start) begin
      automatic stage_t e;
      automatic int which = rc_start ? 0 : conv_start ? 1 : pool_start ? 2 : dense_start ? 3 : 4;
      checks++;
      if ($countones({rc_start, conv_start, pool_start, dense_start, res_start}) != 1) failures++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected stage"); end
      else begin
        e = exp_q.pop_front();
        checks += 3;
        if (phase != e.ph) begin failures++; $display("stage %0d: phase %s exp %s", got, phase.name(), e.ph.name()); end
        if (e.li >= 0 && layer != layer_cfg(e.li)) begin failures++; $display("stage %0d: layer", got); end
        if (e.li >= 0 && e.ph != PH_WGT && in_bank != 1'(e.li % 2)) begin failures++; $display("stage %0d: bank", got); end
        if (rc_img != (e.ph == PH_IMG)) begin failures++; $display("rc_img"); end
      end
      got++;
      @(negedge clk);
      checks++;
      if (rc_start | conv_start | pool_start | dense_start | res_start) begin failures++; $display("start longer than one clock"); end
      repeat ($urandom_range(30, 1)) @(negedge clk);
      case (which)
        0: rc_done = 1; 1: conv_done = 1; 2: pool_done = 1; 3: dense_done = 1; default: res_done = 1;
      endcase
      @(negedge clk);
      {rc_done, conv_done, pool_done, dense_done, res_done} = '0;
    end
  end

  initial begin #2ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      exp_q.push_back('{PH_IMG, -1});
      for (int l = 0; l < N_LAYERS; l++) begin
        automatic layer_t L = layer_cfg(l);
        if (L.op != OP_POOL) exp_q.push_back('{PH_WGT, l});
        exp_q.push_back('{L.op == OP_CONV ? PH_CONV : L.op == OP_POOL ? PH_POOL : PH_DENSE, l});
      end
      exp_q.push_back('{PH_RESULT, -1});
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      checks++;
      if (!busy) begin failures++; $display("not busy"); end
      @(posedge done);
      @(negedge clk);
      checks += 2;
      if (busy) begin failures++; $display("busy after done"); end
      if (exp_q.size() != 0) begin failures++; $display("%0d stages missing", exp_q.size()); end
    end
    checks++;
    if (got != 2 * 18) begin failures++; $display("stages %0d", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
