// border_control: intermediate-image edge detection, used instead of
// storing ZeroPadding copies of every feature map.
//
// For the window tap at row y+dy (dy = -1..1) and column x of a size x size
// map, it reports whether the tap lies in_img the map and, if so, its linear
// address ch*size*size + row*size + x. Taps outside read as zero, so the
// convolution is "same"-padded without a padded copy in memory.
//
// Purely combinational. The function (edge detection replacing
// ZeroPadding) follows the paper; the address arithmetic is this design's.
module border_control
  import lwdd_pkg::*;
(
  input  logic [5:0]       size,
  input  logic [4:0]       ch,
  input  logic [5:0]       y,
  input  logic [1:0]       dy,     // 0: row y-1, 1: row y, 2: row y+1
  input  logic [6:0]       x,      // may equal size (right border)
  output logic             in_img,
  output logic [FM_AW-1:0] addr
);
  logic signed [7:0] row;
  always_comb begin
    row    = $signed({2'b00, y}) + $signed({6'b0, dy}) - 8'sd1;
    in_img = (row >= 0) && (row < $signed({2'b00, size})) && ({1'b0, x} < {2'b0, size});
    addr   = FM_AW'(ch) * FM_AW'(size) * FM_AW'(size)
           + FM_AW'(row[5:0]) * FM_AW'(size) + FM_AW'(x);
  end
endmodule
