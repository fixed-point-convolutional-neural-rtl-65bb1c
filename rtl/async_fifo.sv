// async_fifo: dual-clock FIFO in on-chip memory, used as the camera FIFO
// (camera clock -> system clock) and suitable for the screen FIFO.
//
// It solves both problems of moving video between clock domains: the
// crossing itself, and rate matching, so that the reader can take data in
// bursts at its own, faster clock. Pointers are kept in Gray code and each
// is passed to the other domain through a two-flop synchroniser; full and
// empty are therefore pessimistic for two clocks but never wrong.
//
// Interface: write side (wclk) pushes wdata when we && !full; a push while
// full is dropped and flagged on ovf for one wclk. Read side (rclk): rdata
// shows the oldest word whenever !empty (first-word fall-through); re pops
// it. Depth is 2**AW words. The use of FPGA-memory FIFOs for the crossing
// follows the paper; depth, Gray pointers and the overflow flag are this
// design's choice.
module async_fifo #(
  parameter int unsigned W  = 17,
  parameter int unsigned AW = 9
)(
  input  logic         wclk,
  input  logic         wrst_n,
  input  logic         we,
  input  logic [W-1:0] wdata,
  output logic         full,
  output logic         ovf,
  input  logic         rclk,
  input  logic         rrst_n,
  input  logic         re,
  output logic [W-1:0] rdata,
  output logic         empty
);
  logic [W-1:0] mem [2**AW];
  logic [AW:0]  wbin, wgray, rbin, rgray;
  logic [AW:0]  wq1, wq2, rq1, rq2;   // wq: read pointer in write domain
  logic [AW:0]  wbin_n, rbin_n;

  function automatic logic [AW:0] b2g(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write domain
  assign wbin_n = wbin + 1'b1;
  assign full   = (wgray == {~wq2[AW:AW-1], wq2[AW-2:0]});

  always_ff @(posedge wclk) begin
    if (we && !full) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; wq1 <= '0; wq2 <= '0; ovf <= 1'b0;
    end else begin
      wq1 <= rgray; wq2 <= wq1;
      ovf <= we && full;
      if (we && !full) begin
        wbin  <= wbin_n;
        wgray <= b2g(wbin_n);
      end
    end
  end

  // read domain
  assign rbin_n = rbin + 1'b1;
  assign empty  = (rgray == rq2);
  assign rdata  = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; rq1 <= '0; rq2 <= '0;
    end else begin
      rq1 <= wgray; rq2 <= rq1;
      if (re && !empty) begin
        rbin  <= rbin_n;
        rgray <= b2g(rbin_n);
      end
    end
  end
endmodule
