// maxpool_layer: the "MaxPooling layers module": 2x2 max pooling with
// stride 2 over every channel of a size x size feature-map set, from one
// feature-map bank to the other.
//
// For each output pixel (ch, oy, ox) the four inputs (2oy+dy, 2ox+dx) are
// read one per clock and the running maximum is kept; the output is written
// when the fourth value arrives. Reads of the next output overlap the write
// of the previous one, so the layer takes 4 clocks per output plus 3:
// in_ch*(size/2)^2*4 + 3 clocks from start to done (the paper's pooling
// stages also cost about 4 clocks per output). Operation follows the
// network; the read order and timing are this design's choice.
module maxpool_layer
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
  output data_t              fm_wdata
);
  logic       run;
  logic [4:0] ch;
  logic [5:0] oy, ox, osz;
  logic [1:0] c;
  logic [1:0] drain;
  logic       d_v, d_first, d_last;
  logic [FM_AW-1:0] d_addr;
  data_t      m;

  assign osz     = layer.size >> 1;
  assign rd_sel  = {1'b1, in_bank};
  assign rd_addr = WDB_AW'(int'(ch) * int'(layer.size) * int'(layer.size)
                         + (2 * int'(oy) + int'(c[1])) * int'(layer.size)
                         + 2 * int'(ox) + int'(c[0]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; busy <= 1'b0; done <= 1'b0; ch <= '0; oy <= '0; ox <= '0;
      c <= '0; drain <= '0; d_v <= 1'b0; d_first <= 1'b0; d_last <= 1'b0;
      d_addr <= '0; m <= '0; fm_we <= 1'b0; fm_waddr <= '0; fm_wdata <= '0;
    end else begin
      done  <= 1'b0;
      fm_we <= 1'b0;
      d_v   <= 1'b0;
      if (start && !busy) begin
        run <= 1'b1; busy <= 1'b1; ch <= '0; oy <= '0; ox <= '0; c <= '0;
      end else if (run) begin
        d_v     <= 1'b1;
        d_first <= (c == 2'd0);
        d_last  <= (c == 2'd3);
        d_addr  <= FM_AW'(int'(ch) * int'(osz) * int'(osz) + int'(oy) * int'(osz) + int'(ox));
        c <= c + 1'b1;
        if (c == 2'd3) begin
          if (ox == osz - 1'b1) begin
            ox <= '0;
            if (oy == osz - 1'b1) begin
              oy <= '0;
              if (ch == layer.in_ch - 1'b1) begin run <= 1'b0; drain <= 2'd2; end
              else ch <= ch + 1'b1;
            end else oy <= oy + 1'b1;
          end else ox <= ox + 1'b1;
        end
      end else if (busy) begin
        drain <= drain - 1'b1;
        if (drain == 2'd0) begin busy <= 1'b0; done <= 1'b1; end
      end
      // data stage
      if (d_v) begin
        if (d_first) m <= rdata;
        else if (rdata > m) m <= rdata;
        if (d_last) begin
          fm_we    <= 1'b1;
          fm_waddr <= d_addr;
          fm_wdata <= (rdata > m) ? rdata : m;
        end
      end
    end
  end
endmodule
