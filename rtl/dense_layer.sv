// dense_layer: the "Dense layers module": a fully connected layer without
// bias (LWDD: 16 inputs -> 11 outputs), computed on the same 9-input
// convolution block as the convolution layers.
//
// The inputs of each output neuron are split into blocks of nine (16 inputs
// give two blocks, the second padded with zeros). For each (output o,
// block b) the nine inputs are read from the feature-map bank one per clock
// into a 9-entry vector; the matching weight word o*blocks+b is read from
// the RAM module in one clock; the convolution block forms the 9-term
// product, which is accumulated at full precision over the blocks. After the
// last block the sum is rounded and saturated (and passed through ReLU if
// the layer asks for it; LWDD's dense layer does not) and written to address
// o of the other bank. A block takes 10 clocks (9 reads + 1); the layer takes
// out*blocks*10 + 4 clocks from start to done.
// Splitting into blocks of nine follows the paper; the read schedule is
// this design's choice.
// The 9-weight word from the weight RAM goes straight to the shared
// convolution block (cb_w = w_rdata), which multiplies it with the pixels
// in the clock it is read, so no copy is kept here.
module dense_layer
  import lwdd_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  layer_t             layer,
  input  logic               in_bank,
  output logic               busy,
  output logic               done,
  output logic [1:0]         rd_sel,
  output logic [WDB_AW-1:0]  rd_addr,
  input  data_t              rdata,
  output logic               fm_we,
  output logic [FM_AW-1:0]   fm_waddr,
  output data_t              fm_wdata,
  output logic [WRAM_AW-1:0] w_raddr,
  input  vec9_t              w_rdata,
  output logic               cb_en,
  output vec9_t              cb_p,
  output vec9_t              cb_w,
  input  acc_t               cb_sum,
  output logic               ovf_evt
);
  logic        run;
  logic [4:0]  o, b, nblk;
  logic [3:0]  c;
  logic [2:0]  drain;
  logic        valid_in, valid_q;
  logic [3:0]  k_q;
  vec9_t       vec;
  logic        p1_v, p1_first, p1_last;
  logic [4:0]  p1_o;
  logic        p2_v, p2_first, p2_last;
  logic [4:0]  p2_o;
  acc_t        acc_r, acc;
  data_t       val, res;
  logic        ovf;
  int unsigned in_idx;

  assign nblk     = 5'((int'(layer.size) + 8) / 9);
  assign in_idx   = int'(b) * 9 + int'(c);
  assign valid_in = (c <= 4'd8) && (in_idx < int'(layer.size));
  assign rd_sel   = {1'b1, in_bank};
  assign rd_addr  = valid_in ? WDB_AW'(in_idx) : '0;
  assign w_raddr  = WRAM_AW'(int'(o) * int'(nblk) + int'(b));
  assign cb_en    = p1_v;
  assign cb_p     = vec;
  assign cb_w     = w_rdata;

  always_comb begin
    acc = (p2_first ? acc_t'(0) : acc_r) + cb_sum;
    val = round_sat(acc, ovf);
    res = (layer.relu && val < 0) ? data_t'(0) : val;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; busy <= 1'b0; done <= 1'b0; o <= '0; b <= '0; c <= '0;
      drain <= '0; valid_q <= 1'b0; k_q <= '0; vec <= '0;
      p1_v <= 1'b0; p1_first <= 1'b0; p1_last <= 1'b0; p1_o <= '0;
      p2_v <= 1'b0; p2_first <= 1'b0; p2_last <= 1'b0; p2_o <= '0;
      acc_r <= '0; fm_we <= 1'b0; fm_waddr <= '0; fm_wdata <= '0; ovf_evt <= 1'b0;
    end else begin
      done    <= 1'b0;
      fm_we   <= 1'b0;
      ovf_evt <= 1'b0;
      p1_v    <= 1'b0;
      valid_q <= valid_in;
      k_q     <= c;
      if (start && !busy) begin
        run <= 1'b1; busy <= 1'b1; o <= '0; b <= '0; c <= '0;
      end else if (run) begin
        if (c >= 4'd1) vec[k_q] <= valid_q ? rdata : data_t'(0);
        if (c == 4'd9) begin
          c        <= '0;
          p1_v     <= 1'b1;
          p1_o     <= o;
          p1_first <= (b == 0);
          p1_last  <= (b == nblk - 1'b1);
          if (b == nblk - 1'b1) begin
            b <= '0;
            if (o == layer.out_ch - 1'b1) begin run <= 1'b0; drain <= 3'd3; end
            else o <= o + 1'b1;
          end else b <= b + 1'b1;
        end else c <= c + 1'b1;
      end else if (busy) begin
        drain <= drain - 1'b1;
        if (drain == 3'd0) begin busy <= 1'b0; done <= 1'b1; end
      end
      // P1 -> P2
      p2_v     <= p1_v;
      p2_first <= p1_first;
      p2_last  <= p1_last;
      p2_o     <= p1_o;
      // P2: accumulate over blocks, finish the neuron on its last block
      if (p2_v) begin
        acc_r <= acc;
        if (p2_last) begin
          fm_we    <= 1'b1;
          fm_waddr <= FM_AW'(p2_o);
          fm_wdata <= res;
          ovf_evt  <= ovf;
        end
      end
    end
  end
endmodule
