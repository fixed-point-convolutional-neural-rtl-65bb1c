// nn_database: the network's storage ("database"): the converted 28x28
// input image, every weight of every layer, and two feature-map banks for
// the intermediate results.
//
// Regions: IMG  784 x 8-bit grey pixels, written by the image converter;
//          WGT  N_WEIGHTS x DW-bit weights, written once through the weight
//               load port (the trained, pre-scaled weights);
//          FM0/FM1 two banks of FM_WORDS x DW bits. A layer reads its input
//               from one bank and writes its output to the other.
// One shared read port serves whichever unit the control module has
// started; one write port writes the feature-map banks. Timing: synchronous
// read, rdata one clock after the request; writes take effect at the clock
// edge. For IMG the pixel is returned zero-extended in rdata[7:0].
//
// That the database holds image, weights and feature maps follows the
// paper; the split into four arrays and the port arrangement are this
// design's choice.
module nn_database
  import lwdd_pkg::*;
(
  input  logic              clk,
  // external image write port
  input  logic              img_we,
  input  logic [9:0]        img_waddr,
  input  logic [7:0]        img_wdata,
  // external weight load port
  input  logic              wgt_we,
  input  logic [WDB_AW-1:0] wgt_waddr,
  input  data_t             wgt_wdata,
  // shared read port
  input  logic [1:0]        rd_sel,     // 0 IMG, 1 WGT, 2 FM0, 3 FM1
  input  logic [WDB_AW-1:0] rd_addr,
  output data_t             rdata,
  // feature-map write port
  input  logic              fm_we,
  input  logic              fm_bank,
  input  logic [FM_AW-1:0]  fm_waddr,
  input  data_t             fm_wdata
);
  logic [7:0] img_mem [IMG_PIX];
  data_t      wgt_mem [N_WEIGHTS];
  data_t      fm0_mem [FM_WORDS];
  data_t      fm1_mem [FM_WORDS];

  logic [7:0] img_q;
  data_t      wgt_q, fm0_q, fm1_q;
  logic [1:0] sel_q;

  always_ff @(posedge clk) begin
    if (img_we) img_mem[img_waddr] <= img_wdata;
    if (wgt_we) wgt_mem[wgt_waddr] <= wgt_wdata;
    if (fm_we && !fm_bank) fm0_mem[fm_waddr] <= fm_wdata;
    if (fm_we &&  fm_bank) fm1_mem[fm_waddr] <= fm_wdata;
    img_q <= img_mem[rd_addr[9:0] < 10'(IMG_PIX) ? rd_addr[9:0] : 10'd0];
    wgt_q <= wgt_mem[rd_addr < WDB_AW'(N_WEIGHTS) ? rd_addr : '0];
    fm0_q <= fm0_mem[rd_addr[FM_AW-1:0] < FM_AW'(FM_WORDS) ? rd_addr[FM_AW-1:0] : '0];
    fm1_q <= fm1_mem[rd_addr[FM_AW-1:0] < FM_AW'(FM_WORDS) ? rd_addr[FM_AW-1:0] : '0];
    sel_q <= rd_sel;
  end

  always_comb begin
    unique case (sel_q)
      2'd0:    rdata = data_t'({1'b0, img_q});
      2'd1:    rdata = wgt_q;
      2'd2:    rdata = fm0_q;
      default: rdata = fm1_q;
    endcase
  end
endmodule
