// conv_layer: the "Convolution layers module". Runs one 3x3, stride-1,
// zero-padded convolution layer without bias, followed by rounding,
// overflow saturation, ReLU and, for the last conv layer, GlobalMaxPooling.
//
// Schedule: for each output channel oc, for each input channel ic, the
// input map is scanned row by row. Each step fetches one new column of three
// pixels (rows y-1, y, y+1) through the border control, one pixel per clock,
// and shifts it into the 3x3 window, so a step is 4 clocks (3 reads + 1 to
// take the last pixel). A row is size+1 steps: the first only preloads
// column 0; step s (s>=1) completes the window centred on x = s-1. The
// window and the weight set of (oc, ic), read from the RAM module in one
// clock, go to the shared convolution block. The full-precision partial sum
// of every output pixel is accumulated over the input channels in a local
// partial-sum memory; after the last input channel the sum is rounded once,
// saturated (the overflow detector: out-of-range values become the largest
// value of the range) and passed through ReLU. In GMP mode the outputs are
// not stored; the largest value of each output map is kept instead and
// written at address oc, which is how GlobalMaxPooling is obtained without
// a separate layer.
//
// Pipeline behind the window: P1 (convolution block, partial-sum read) and
// P2 (accumulate, round, write). Layer time:
// out_ch*in_ch*size*(size+1)*4 + 3 clocks from start to done.
// Ordering of the loops, the 4-clock step and the partial-sum memory are
// this design's choices; the 3-new-pixels shift register, one-clock weight
// fetch, rounding at the end, saturation and GMP folding follow the paper.
// The 9-weight word from the weight RAM goes straight to the shared
// convolution block (cb_w = w_rdata), which multiplies it with the pixels
// in the clock it is read, so no copy is kept here.
module conv_layer
  import lwdd_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  layer_t             layer,
  input  logic               in_bank,
  output logic               busy,
  output logic               done,
  // database read port (input feature maps)
  output logic [1:0]         rd_sel,
  output logic [WDB_AW-1:0]  rd_addr,
  input  data_t              rdata,
  // feature-map write port (output feature maps)
  output logic               fm_we,
  output logic [FM_AW-1:0]   fm_waddr,
  output data_t              fm_wdata,
  // RAM module read port (weights)
  output logic [WRAM_AW-1:0] w_raddr,
  input  vec9_t              w_rdata,
  // shared convolution block
  output logic               cb_en,
  output vec9_t              cb_p,
  output vec9_t              cb_w,
  input  acc_t               cb_sum,
  // events
  output logic               ovf_evt,   // a value was saturated
  output logic               edge_evt   // a zero-padding tap was used
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [4:0] oc, ic;
  logic [5:0] y;
  logic [6:0] s;
  logic [1:0] c;
  logic [1:0] drain;
  logic       in_img, in_img_q;
  logic [FM_AW-1:0] baddr;
  data_t      col [3];
  data_t      col_q0, col_q1;
  vec9_t      win;
  logic       shift, clr;

  // pipeline registers
  logic       p1_v, p1_first, p1_last, p1_lastpos;
  logic [5:0] p1_x, p1_y;
  logic [4:0] p1_oc;
  logic       p2_v, p2_first, p2_last, p2_lastpos;
  logic [5:0] p2_x, p2_y;
  logic [4:0] p2_oc;

  acc_t       psum_mem [PSUM_WORDS];
  acc_t       psum_q;
  data_t      gmax;

  border_control u_border (
    .size(layer.size), .ch(ic), .y(y), .dy(c), .x(s),
    .in_img(in_img), .addr(baddr)
  );

  assign rd_sel  = {1'b1, in_bank};
  assign rd_addr = WDB_AW'(baddr);
  assign w_raddr = WRAM_AW'(int'(oc) * int'(layer.in_ch) + int'(ic));

  assign shift = (state == S_RUN) && (c == 2'd3);
  assign clr   = (state == S_RUN) && (c == 2'd0) && (s == 7'd0);

  always_comb begin
    col[0] = col_q0;
    col[1] = col_q1;
    col[2] = in_img_q ? rdata : data_t'(0);
  end

  shift_window u_win (.clk(clk), .clr(clr), .shift(shift), .col(col), .win(win));

  assign cb_en = p1_v;
  assign cb_p  = win;
  assign cb_w  = w_rdata;

  // Control and window fetch
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; busy <= 1'b0; done <= 1'b0;
      oc <= '0; ic <= '0; y <= '0; s <= '0; c <= '0; drain <= '0;
      in_img_q <= 1'b0; col_q0 <= '0; col_q1 <= '0;
      p1_v <= 1'b0; p1_first <= 1'b0; p1_last <= 1'b0; p1_lastpos <= 1'b0;
      p1_x <= '0; p1_y <= '0; p1_oc <= '0;
      edge_evt <= 1'b0;
    end else begin
      done     <= 1'b0;
      p1_v     <= 1'b0;
      edge_evt <= 1'b0;
      in_img_q <= in_img;
      case (state)
        S_IDLE: if (start) begin
          state <= S_RUN; busy <= 1'b1;
          oc <= '0; ic <= '0; y <= '0; s <= '0; c <= '0;
        end
        S_RUN: begin
          if (c != 2'd3 && !in_img) edge_evt <= 1'b1;
          if (c == 2'd1) col_q0 <= in_img_q ? rdata : data_t'(0);
          if (c == 2'd2) col_q1 <= in_img_q ? rdata : data_t'(0);
          c <= c + 1'b1;
          if (c == 2'd3) begin
            if (s != 0) begin
              p1_v       <= 1'b1;
              p1_x       <= 6'(s - 1'b1);
              p1_y       <= y;
              p1_oc      <= oc;
              p1_first   <= (ic == 0);
              p1_last    <= (ic == layer.in_ch - 1'b1);
              p1_lastpos <= (y == layer.size - 1'b1) && (s == {1'b0, layer.size});
            end
            if (s == {1'b0, layer.size}) begin
              s <= '0;
              if (y == layer.size - 1'b1) begin
                y <= '0;
                if (ic == layer.in_ch - 1'b1) begin
                  ic <= '0;
                  if (oc == layer.out_ch - 1'b1) begin
                    state <= S_DRAIN; drain <= 2'd2;
                  end else oc <= oc + 1'b1;
                end else ic <= ic + 1'b1;
              end else y <= y + 1'b1;
            end else s <= s + 1'b1;
          end
        end
        S_DRAIN: begin
          drain <= drain - 1'b1;
          if (drain == 2'd0) begin state <= S_IDLE; busy <= 1'b0; done <= 1'b1; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // P1 -> P2: partial-sum read alongside the convolution block
  always_ff @(posedge clk) begin
    psum_q <= psum_mem[int'(p1_y) * int'(layer.size) + int'(p1_x)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p2_v <= 1'b0; p2_first <= 1'b0; p2_last <= 1'b0; p2_lastpos <= 1'b0;
      p2_x <= '0; p2_y <= '0; p2_oc <= '0;
    end else begin
      p2_v       <= p1_v;
      p2_first   <= p1_first;
      p2_last    <= p1_last;
      p2_lastpos <= p1_lastpos;
      p2_x       <= p1_x;
      p2_y       <= p1_y;
      p2_oc      <= p1_oc;
    end
  end

  // P2: accumulate, round, saturate, ReLU, write
  acc_t  acc;
  data_t val, res;
  logic  ovf;
  always_comb begin
    acc = (p2_first ? acc_t'(0) : psum_q) + cb_sum;
    val = round_sat(acc, ovf);
    res = (layer.relu && val < 0) ? data_t'(0) : val;
  end

  always_ff @(posedge clk) begin
    if (p2_v && !p2_last)
      psum_mem[int'(p2_y) * int'(layer.size) + int'(p2_x)] <= acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fm_we <= 1'b0; fm_waddr <= '0; fm_wdata <= '0; gmax <= '0; ovf_evt <= 1'b0;
    end else begin
      fm_we   <= 1'b0;
      ovf_evt <= p2_v && p2_last && ovf;
      if (start && state == S_IDLE) gmax <= '0;
      if (p2_v && p2_last) begin
        if (layer.gmp) begin
          if (p2_lastpos) begin
            fm_we    <= 1'b1;
            fm_waddr <= FM_AW'(p2_oc);
            fm_wdata <= (res > gmax) ? res : gmax;
            gmax     <= '0;
          end else if (res > gmax) begin
            gmax <= res;
          end
        end else begin
          fm_we    <= 1'b1;
          fm_waddr <= FM_AW'(int'(p2_oc) * int'(layer.size) * int'(layer.size)
                             + int'(p2_y) * int'(layer.size) + int'(p2_x));
          fm_wdata <= res;
        end
      end
    end
  end
endmodule
