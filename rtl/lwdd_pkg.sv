// lwdd_pkg: shared constants, types and the layer table of the LWDD
// (Low Weights Digit Detector) network accelerator.
//
// Number format: every activation and weight is a signed two's-complement
// word of DW bits holding x*2^FRAC with FRAC = DW-1, i.e. the range [-1, 1).
// The network is trained off-line and each layer's weights are divided by
// the layer's reduction coefficient so that no layer output leaves [-1, 1];
// the hardware therefore only needs one fixed format. Products are kept at
// full precision and summed without rounding; the sum is rounded once at the
// end of the convolution and any value that still leaves the range is
// replaced by the largest value of the range (overflow saturation).
//
// Layer table: the eight computing layers of LWDD as drawn in the network
// diagram (conv1..conv6 3x3 without bias, two 2x2 max-pools, global max
// pooling folded into conv6, dense 16->11, softmax replaced by argmax).
// The word width (12 bits, the narrowest width with zero mismatches when
// rounding at the end) follows the paper; the weight ordering in the
// database and the rounding rule (round half up) are this design's choice.
package lwdd_pkg;

  // Data / weight word width and fraction bits.
  parameter int unsigned DW   = 12;
  parameter int unsigned FRAC = DW - 1;
  // Accumulator: 2*DW-bit products, up to 16 inputs x 9 taps summed.
  parameter int unsigned ACCW = 2 * DW + 8;

  // Image and memory geometry.
  parameter int unsigned IMG      = 28;           // network input is 28x28
  parameter int unsigned IMG_PIX  = IMG * IMG;    // 784
  parameter int unsigned FM_WORDS = IMG_PIX * 4;  // largest feature map set: 28x28x4 = 3136
  parameter int unsigned FM_AW    = 12;
  parameter int unsigned N_WEIGHTS = 4676;        // all LWDD weights
  parameter int unsigned WDB_AW   = 13;
  parameter int unsigned WRAM_WORDS = 256;        // largest layer: conv6 16x16 sets
  parameter int unsigned WRAM_AW  = 8;
  parameter int unsigned N_CLASSES = 11;          // digits 0..9 and "no digit"
  parameter int unsigned PSUM_WORDS = IMG_PIX;

  typedef logic signed [DW-1:0]   data_t;
  typedef logic signed [ACCW-1:0] acc_t;
  typedef data_t [8:0]            vec9_t;        // one 3x3 set, index ky*3+kx

  typedef enum logic [2:0] {
    OP_CONV  = 3'd0,
    OP_POOL  = 3'd1,
    OP_DENSE = 3'd2
  } op_e;

  // What the network is doing; also selects which unit owns the shared
  // database read port, feature-map write port and convolution block.
  typedef enum logic [2:0] {
    PH_IDLE   = 3'd0,
    PH_IMG    = 3'd1,   // initial image loading
    PH_WGT    = 3'd2,   // loading weights of the next layer
    PH_CONV   = 3'd3,
    PH_POOL   = 3'd4,
    PH_DENSE  = 3'd5,
    PH_RESULT = 3'd6
  } phase_e;

  typedef struct packed {
    op_e         op;
    logic [5:0]  size;     // input height = width (dense: number of inputs)
    logic [4:0]  in_ch;
    logic [4:0]  out_ch;   // dense: number of outputs
    logic        relu;
    logic        gmp;      // conv only: fold GlobalMaxPooling into this layer
    logic [12:0] wbase;    // first weight of the layer in the database
  } layer_t;

  parameter int unsigned N_LAYERS = 9;

  function automatic layer_t layer_cfg(input int unsigned i);
    layer_t l;
    case (i)
      0: l = '{OP_CONV,  6'd28, 5'd1,  5'd4,  1'b1, 1'b0, 13'd0};     // conv1
      1: l = '{OP_CONV,  6'd28, 5'd4,  5'd4,  1'b1, 1'b0, 13'd36};    // conv2
      2: l = '{OP_POOL,  6'd28, 5'd4,  5'd4,  1'b0, 1'b0, 13'd0};     // pool1
      3: l = '{OP_CONV,  6'd14, 5'd4,  5'd8,  1'b1, 1'b0, 13'd180};   // conv3
      4: l = '{OP_CONV,  6'd14, 5'd8,  5'd8,  1'b1, 1'b0, 13'd468};   // conv4
      5: l = '{OP_POOL,  6'd14, 5'd8,  5'd8,  1'b0, 1'b0, 13'd0};     // pool2
      6: l = '{OP_CONV,  6'd7,  5'd8,  5'd16, 1'b1, 1'b0, 13'd1044};  // conv5
      7: l = '{OP_CONV,  6'd7,  5'd16, 5'd16, 1'b1, 1'b1, 13'd2196};  // conv6 + GMP
      default: l = '{OP_DENSE, 6'd16, 5'd1, 5'd11, 1'b0, 1'b0, 13'd4500}; // dense
    endcase
    return l;
  endfunction

  // Number of 9-weight sets a layer holds in the weight RAM.
  function automatic int unsigned layer_sets(input layer_t l);
    if (l.op == OP_DENSE) return int'(l.out_ch) * ((int'(l.size) + 8) / 9);
    else                  return int'(l.in_ch) * int'(l.out_ch);
  endfunction

  // Round a full-precision sum (2*FRAC fraction bits) back to the data
  // format, half up, and saturate to the format's range. ovf reports that
  // saturation replaced the value.
  function automatic data_t round_sat(input acc_t a, output logic ovf);
    acc_t r;
    r = (a + (acc_t'(1) <<< (FRAC - 1))) >>> FRAC;
    ovf = 1'b0;
    if (r > acc_t'((1 <<< (DW - 1)) - 1)) begin
      ovf = 1'b1;
      return data_t'((1 <<< (DW - 1)) - 1);
    end else if (r < -acc_t'(1 <<< (DW - 1))) begin
      ovf = 1'b1;
      return data_t'(-(1 <<< (DW - 1)));
    end
    return data_t'(r);
  endfunction

endpackage
