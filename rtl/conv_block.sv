// conv_block: the shared 3x3 "Convolution block" of the accelerator.
//
// A scalar product of two 9-element vectors: nine signed DW x DW
// multiplications and an adder tree of eight additions, computed in one
// clock. The result is kept at full precision (2*FRAC fraction bits) so that
// rounding happens once, at the end of a whole convolution, as the paper
// recommends. Both the convolution layers and the dense layer use it; the
// dense layer feeds it 9 inputs at a time.
//
// Timing: p and w are sampled with en high; sum is valid on the next clock
// edge (one-cycle latency, registered output). Nine products per clock
// follows the paper; the output register is this design's choice.
module conv_block
  import lwdd_pkg::*;
(
  input  logic  clk,
  input  logic  en,
  input  vec9_t p,      // pixels / inputs, index ky*3+kx
  input  vec9_t w,      // weights, same index
  output acc_t  sum
);
  acc_t prod [9];
  acc_t tree;

  always_comb begin
    tree = '0;
    for (int k = 0; k < 9; k++) begin
      prod[k] = acc_t'(p[k]) * acc_t'(w[k]);
      tree    = tree + prod[k];
    end
  end

  always_ff @(posedge clk)
    if (en) sum <= tree;
endmodule
