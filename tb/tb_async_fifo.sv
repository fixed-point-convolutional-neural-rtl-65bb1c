// tb_async_fifo: writer and reader on unrelated clocks with random enables;
// checks that every accepted word comes out once and in order, that full
// blocks writes (flagged by ovf) and that empty is set when drained.
`timescale 1ns/1ps
module tb_async_fifo;
  localparam int W = 17, AW = 4;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0, we = 0, re = 0;
  always #3.5 wclk = ~wclk;
  always #5 rclk = ~rclk;
  logic [W-1:0] wdata = 0, rdata;
  logic full, empty, ovf;
  int checks = 0, failures = 0, n_ovf = 0, n_full = 0, n_out = 0;
  logic [W-1:0] q [$];
  int phase = 0;   // 0: balanced, 1: writer fast (fills), 2: drain

  async_fifo #(.W(W), .AW(AW)) dut (.*);

  always @(posedge wclk) begin
    if (ovf) n_ovf++;
    if (full) n_full++;
  end

  initial begin #2ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // writer
  initial begin
    repeat (3) @(negedge wclk); wrst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge wclk);
      we = (phase == 2) ? 1'b0 : ($urandom_range(3, 0) != 0);
      wdata = W'($urandom);
      if (we && !full) q.push_back(wdata);
    end
    @(negedge wclk); we = 0;
  end
  // reader
  initial begin
    repeat (3) @(negedge rclk); rrst_n = 1;
    forever begin
      @(negedge rclk);
      re = (phase == 1) ? ($urandom_range(7, 0) == 0) : ($urandom_range(1, 0) == 1);
      if (re && !empty) begin
        checks++;
        if (q.size() == 0) begin failures++; $display("read from empty model"); end
        else begin
          automatic logic [W-1:0] e = q.pop_front();
          if (rdata != e) begin failures++; $display("data %h exp %h", rdata, e); end
        end
        n_out++;
      end
    end
  end

  initial begin
    #4us;  phase = 1;
    #8us;  phase = 0;
    #8us;  phase = 2;
    #10us;
    checks++;
    if (!empty || q.size() != 0) begin failures++; $display("not drained: %0d left", q.size()); end
    checks++;
    if (n_full == 0 || n_ovf == 0) begin failures++; $display("full/ovf never seen"); end
    $display("words %0d, full clocks %0d, dropped writes %0d", n_out, n_full, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
