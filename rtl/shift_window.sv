// shift_window: the 3x3 pixel window shift register of the convolution unit.
//
// Moving the 3x3 window one column to the right keeps six of its nine
// pixels; only the new right-hand column of three pixels has to be fetched.
// Each shift pushes the oldest (left) column out and the new column in on
// the right. clr empties the window (all zero), which is how the left image
// border reads as zero padding at the start of a row.
//
// Interface: col[0..2] are rows y-1, y, y+1 of the new column. win is the
// window, index ky*3+kx (kx=2 is the newest column). Timing: one shift per
// clock with shift high; clr has priority. The behaviour follows the paper's
// shift-register description; the clear input is this design's choice.
module shift_window
  import lwdd_pkg::*;
(
  input  logic  clk,
  input  logic  clr,
  input  logic  shift,
  input  data_t col [3],
  output vec9_t win
);
  always_ff @(posedge clk) begin
    if (clr) begin
      win <= '0;
    end else if (shift) begin
      for (int r = 0; r < 3; r++) begin
        win[r*3 + 0] <= win[r*3 + 1];
        win[r*3 + 1] <= win[r*3 + 2];
        win[r*3 + 2] <= col[r];
      end
    end
  end
endmodule
