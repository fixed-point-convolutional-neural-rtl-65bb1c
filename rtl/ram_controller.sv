// ram_controller: moves data out of the database into the working memories.
//
// Two jobs, selected by load_img at start:
//  * image load: copies the 784 8-bit grey pixels of the input image into
//    feature-map bank 0, converting each pixel p to the data format as
//    p/256, i.e. p << (FRAC-8);
//  * weight load: copies the weights of one layer into the RAM module,
//    stacking nine consecutive weights into one word so that a full 3x3 set
//    is later read in one clock. For the dense layer each output's inputs
//    are split into blocks of nine; weights past the last input are zero.
// Every value costs two clocks (one to address the database, one to take
// the data), which is the rate the paper's load times imply (about 2 clocks
// per weight or pixel).
//
// Weight order in the database (this design's choice): conv layers
// wbase + (oc*in_ch + ic)*9 + ky*3 + kx; dense wbase + o*inputs + i.
// Interface: start (one-clock pulse) with load_img/layer held stable;
// done pulses one clock when the last word is written.
module ram_controller
  import lwdd_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               load_img,
  input  layer_t             layer,
  output logic               busy,
  output logic               done,
  // database read port
  output logic [1:0]         rd_sel,
  output logic [WDB_AW-1:0]  rd_addr,
  input  data_t              rdata,
  // feature-map write port (image load)
  output logic               fm_we,
  output logic [FM_AW-1:0]   fm_waddr,
  output data_t              fm_wdata,
  // RAM module write port (weight load)
  output logic               wr_we,
  output logic [WRAM_AW-1:0] wr_addr,
  output vec9_t              wr_data
);
  logic        mode_img, phase, pad_q;
  logic [9:0]  idx;       // image pixel, or set number
  logic [3:0]  k;         // element within set
  logic [9:0]  nsets;
  vec9_t       pack;
  logic [4:0]  nblk;      // dense: blocks of nine per output
  logic [4:0]  o_cnt, b_cnt;
  int unsigned in_idx;
  logic        pad;

  // Source address of the current weight and whether it is padding.
  always_comb begin
    in_idx = int'(b_cnt) * 9 + int'(k);
    pad    = 1'b0;
    if (mode_img) begin
      rd_sel  = 2'd0;
      rd_addr = WDB_AW'(idx);
    end else begin
      rd_sel = 2'd1;
      if (layer.op == OP_DENSE) begin
        pad     = in_idx >= int'(layer.size);
        rd_addr = layer.wbase + WDB_AW'(int'(o_cnt) * int'(layer.size) + in_idx);
      end else begin
        rd_addr = layer.wbase + WDB_AW'(int'(idx) * 9 + int'(k));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; phase <= 1'b0; idx <= '0; k <= '0;
      mode_img <= 1'b0; nsets <= '0; nblk <= '0; o_cnt <= '0; b_cnt <= '0;
      pack <= '0; pad_q <= 1'b0;
      fm_we <= 1'b0; fm_waddr <= '0; fm_wdata <= '0;
      wr_we <= 1'b0; wr_addr <= '0; wr_data <= '0;
    end else begin
      done  <= 1'b0;
      fm_we <= 1'b0;
      wr_we <= 1'b0;
      if (start && !busy) begin
        busy     <= 1'b1;
        mode_img <= load_img;
        phase    <= 1'b0;
        idx <= '0; k <= '0; o_cnt <= '0; b_cnt <= '0;
        nsets    <= 10'(layer_sets(layer));
        nblk     <= 5'((int'(layer.size) + 8) / 9);
      end else if (busy) begin
        if (!phase) begin
          phase <= 1'b1;              // address issued this clock
          pad_q <= pad;
        end else begin
          phase <= 1'b0;              // data arrives this clock
          if (mode_img) begin
            fm_we    <= 1'b1;
            fm_waddr <= FM_AW'(idx);
            fm_wdata <= data_t'({1'b0, rdata[7:0]}) <<< (FRAC - 8);
            if (idx == 10'(IMG_PIX - 1)) begin busy <= 1'b0; done <= 1'b1; end
            idx <= idx + 1'b1;
          end else begin
            pack[k] <= pad_q ? data_t'(0) : rdata;
            if (k == 4'd8) begin
              k        <= '0;
              wr_we    <= 1'b1;
              wr_addr  <= WRAM_AW'(idx);
              wr_data  <= pack;
              wr_data[8] <= pad_q ? data_t'(0) : rdata;
              idx      <= idx + 1'b1;
              if (b_cnt == nblk - 1'b1) begin b_cnt <= '0; o_cnt <= o_cnt + 1'b1; end
              else b_cnt <= b_cnt + 1'b1;
              if (idx == nsets - 1'b1) begin busy <= 1'b0; done <= 1'b1; end
            end else begin
              k <= k + 1'b1;
            end
          end
        end
      end
    end
  end
endmodule
