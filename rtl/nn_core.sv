// nn_core: the LWDD neural-network accelerator: the database, the RAM
// controller and RAM module, the control module, the convolution, pooling
// and dense layer units, the shared convolution block and the result module.
//
// Use: write the 28x28 grey image (img_*) and, once, all N_WEIGHTS weights
// (wgt_*), then pulse start. The network runs the layer sequence of LWDD
// (conv1..conv6 3x3 with ReLU, two 2x2 max-pools, GlobalMaxPooling folded
// into conv6, dense 16->11, argmax) and pulses done with class_id (0..9:
// digit, 10: no digit). The image buffer may be rewritten as soon as the
// phase has left PH_IMG. One inference takes 247 581 clocks with the
// default layer table (see the README for the per-stage breakdown).
//
// All units share one database read port, one feature-map write port and
// one convolution block; the control module's phase selects the owner. The
// ovf_evt/edge_evt outputs pulse when a value is saturated and when a zero
// padding tap is used. Structure follows the paper's block diagram of the
// network; the sharing scheme is this design's choice.
module nn_core
  import lwdd_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              img_we,
  input  logic [9:0]        img_waddr,
  input  logic [7:0]        img_wdata,
  input  logic              wgt_we,
  input  logic [WDB_AW-1:0] wgt_waddr,
  input  data_t             wgt_wdata,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [3:0]        class_id,
  output data_t             class_score,
  output phase_e            phase,
  output logic              ovf_evt,
  output logic              edge_evt
);
  layer_t layer;
  logic   in_bank;
  logic   rc_start, rc_img, conv_start, pool_start, dense_start, res_start;
  logic   rc_done, conv_done, pool_done, dense_done, res_done;
  logic   rc_busy, conv_busy, pool_busy, dense_busy, res_busy;

  // database ports
  logic [1:0]        rd_sel;
  logic [WDB_AW-1:0] rd_addr;
  data_t             rdata;
  logic              fm_we;
  logic              fm_bank;
  logic [FM_AW-1:0]  fm_waddr;
  data_t             fm_wdata;

  // per-unit port copies
  logic [1:0]        rc_sel, cv_sel, pl_sel, dn_sel, rs_sel;
  logic [WDB_AW-1:0] rc_addr, cv_addr, pl_addr, dn_addr, rs_addr;
  logic              rc_fwe, cv_fwe, pl_fwe, dn_fwe;
  logic [FM_AW-1:0]  rc_fwa, cv_fwa, pl_fwa, dn_fwa;
  data_t             rc_fwd, cv_fwd, pl_fwd, dn_fwd;

  // weight RAM
  logic               wr_we;
  logic [WRAM_AW-1:0] wr_waddr, wr_raddr, cv_wra, dn_wra;
  vec9_t              wr_wdata, wr_rdata;

  // convolution block
  logic  cb_en, cv_cben, dn_cben;
  vec9_t cb_p, cb_w, cv_p, cv_w, dn_p, dn_w;
  acc_t  cb_sum;
  logic  cv_ovf, dn_ovf;

  nn_control u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .phase, .layer, .in_bank,
    .rc_start, .rc_img, .conv_start, .pool_start, .dense_start, .res_start,
    .rc_done, .conv_done, .pool_done, .dense_done, .res_done
  );

  nn_database u_db (
    .clk, .img_we, .img_waddr, .img_wdata, .wgt_we, .wgt_waddr, .wgt_wdata,
    .rd_sel, .rd_addr, .rdata, .fm_we, .fm_bank, .fm_waddr, .fm_wdata
  );

  ram_controller u_rc (
    .clk, .rst_n, .start(rc_start), .load_img(rc_img), .layer, .busy(rc_busy),
    .done(rc_done), .rd_sel(rc_sel), .rd_addr(rc_addr), .rdata,
    .fm_we(rc_fwe), .fm_waddr(rc_fwa), .fm_wdata(rc_fwd),
    .wr_we, .wr_addr(wr_waddr), .wr_data(wr_wdata)
  );

  ram_module u_wram (
    .clk, .we(wr_we), .waddr(wr_waddr), .wdata(wr_wdata),
    .raddr(wr_raddr), .rdata(wr_rdata)
  );

  conv_layer u_conv (
    .clk, .rst_n, .start(conv_start), .layer, .in_bank, .busy(conv_busy),
    .done(conv_done), .rd_sel(cv_sel), .rd_addr(cv_addr), .rdata,
    .fm_we(cv_fwe), .fm_waddr(cv_fwa), .fm_wdata(cv_fwd),
    .w_raddr(cv_wra), .w_rdata(wr_rdata),
    .cb_en(cv_cben), .cb_p(cv_p), .cb_w(cv_w), .cb_sum,
    .ovf_evt(cv_ovf), .edge_evt
  );

  maxpool_layer u_pool (
    .clk, .rst_n, .start(pool_start), .layer, .in_bank, .busy(pool_busy),
    .done(pool_done), .rd_sel(pl_sel), .rd_addr(pl_addr), .rdata,
    .fm_we(pl_fwe), .fm_waddr(pl_fwa), .fm_wdata(pl_fwd)
  );

  dense_layer u_dense (
    .clk, .rst_n, .start(dense_start), .layer, .in_bank, .busy(dense_busy),
    .done(dense_done), .rd_sel(dn_sel), .rd_addr(dn_addr), .rdata,
    .fm_we(dn_fwe), .fm_waddr(dn_fwa), .fm_wdata(dn_fwd),
    .w_raddr(dn_wra), .w_rdata(wr_rdata),
    .cb_en(dn_cben), .cb_p(dn_p), .cb_w(dn_w), .cb_sum, .ovf_evt(dn_ovf)
  );

  result_module u_res (
    .clk, .rst_n, .start(res_start), .in_bank(~in_bank), .busy(res_busy),
    .done(res_done), .rd_sel(rs_sel), .rd_addr(rs_addr), .rdata,
    .class_id, .class_score
  );

  conv_block u_cb (.clk, .en(cb_en), .p(cb_p), .w(cb_w), .sum(cb_sum));

  assign ovf_evt = cv_ovf | dn_ovf;

  // Shared-port steering by phase
  always_comb begin
    rd_sel = rc_sel; rd_addr = rc_addr;
    fm_we = rc_fwe; fm_waddr = rc_fwa; fm_wdata = rc_fwd; fm_bank = 1'b0;
    wr_raddr = cv_wra;
    cb_en = cv_cben; cb_p = cv_p; cb_w = cv_w;
    unique case (phase)
      PH_CONV: begin
        rd_sel = cv_sel; rd_addr = cv_addr;
        fm_we = cv_fwe; fm_waddr = cv_fwa; fm_wdata = cv_fwd; fm_bank = ~in_bank;
      end
      PH_POOL: begin
        rd_sel = pl_sel; rd_addr = pl_addr;
        fm_we = pl_fwe; fm_waddr = pl_fwa; fm_wdata = pl_fwd; fm_bank = ~in_bank;
      end
      PH_DENSE: begin
        rd_sel = dn_sel; rd_addr = dn_addr;
        fm_we = dn_fwe; fm_waddr = dn_fwa; fm_wdata = dn_fwd; fm_bank = ~in_bank;
        wr_raddr = dn_wra;
        cb_en = dn_cben; cb_p = dn_p; cb_w = dn_w;
      end
      PH_RESULT: begin
        rd_sel = rs_sel; rd_addr = rs_addr; fm_we = 1'b0;
      end
      default: ;
    endcase
  end

  // A unit may only be busy in its own phase.
  assert property (@(posedge clk) disable iff (!rst_n)
    conv_busy |-> phase == PH_CONV);
  assert property (@(posedge clk) disable iff (!rst_n)
    dense_busy |-> phase == PH_DENSE);
  assert property (@(posedge clk) disable iff (!rst_n)
    pool_busy |-> phase == PH_POOL);
  assert property (@(posedge clk) disable iff (!rst_n)
    rc_busy |-> (phase == PH_IMG || phase == PH_WGT));
  assert property (@(posedge clk) disable iff (!rst_n)
    res_busy |-> phase == PH_RESULT);
endmodule
