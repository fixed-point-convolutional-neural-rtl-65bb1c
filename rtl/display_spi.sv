// display_spi: serial writer for the TFT display controller (4-wire SPI:
// CSX, D/CX, SCL, SDA), sending one command or data byte at a time.
//
// Interface: a byte is offered on in_data with in_dc (0: command, 1: data
// or parameter) and in_valid, and is taken in the clock where in_ready is
// high. The byte goes out MSB first (D7..D0) on sda, one bit per SCL
// period; the display samples sda and, with the last bit, D/CX on the
// rising edge of scl. csx goes low with the first bit. If the next byte is
// offered by the end of the current one, it follows with csx held low;
// otherwise csx returns high and scl rests low.
//
// Timing: each SCL half period lasts HALF clocks, so a byte takes
// 16*HALF clocks and back-to-back bytes leave no gap. in_ready is high when
// idle and in the last clock of a byte.
//
// Follows the paper: the signal set, the MSB-first bit order, sampling on
// the rising SCL edge and D/CX qualifying the byte (its serial timing
// diagram). Own choices: the byte handshake, HALF, holding D/CX for the
// whole byte, and keeping csx low between consecutive bytes (the diagram
// allows csx to go high between bytes, which is not required).
module display_spi #(
  parameter int unsigned HALF = 1   // clocks per SCL half period
)(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       in_dc,
  input  logic [7:0] in_data,
  output logic       in_ready,
  output logic       csx,
  output logic       dcx,
  output logic       scl,
  output logic       sda
);
  localparam int unsigned CW = (HALF > 1) ? $clog2(HALF) : 1;

  logic          busy;
  logic [7:0]    sh;
  logic [2:0]    bitn;
  logic [CW-1:0] cnt;
  logic          half_end, byte_end;

  assign half_end = (cnt == CW'(HALF - 1));
  assign byte_end = busy && half_end && scl && (bitn == 3'd0);
  assign in_ready = !busy || byte_end;
  assign sda      = busy ? sh[bitn] : 1'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; sh <= '0; bitn <= '0; cnt <= '0;
      csx  <= 1'b1; dcx <= 1'b0; scl <= 1'b0;
    end else if (!busy || byte_end) begin
      scl <= 1'b0;
      cnt <= '0;
      if (in_valid) begin
        busy <= 1'b1;
        sh   <= in_data;
        dcx  <= in_dc;
        bitn <= 3'd7;
        csx  <= 1'b0;
      end else begin
        busy <= 1'b0;
        csx  <= 1'b1;
      end
    end else if (half_end) begin
      cnt <= '0;
      scl <= !scl;
      if (scl) bitn <= bitn - 3'd1;
    end else begin
      cnt <= cnt + CW'(1);
    end
  end

  // A byte in flight keeps the chip selected.
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !csx);

endmodule
