// result_module: the "Module for result generation". The network's final
// Softmax is replaced by a plain maximum search, since both pick the same
// neuron: the module reads the 11 dense-layer outputs from the feature-map
// bank one per clock and reports the index of the largest (the lowest
// index wins a tie). Classes 0..9 are digits; class 10 is "no digit".
//
// Interface: start pulse with in_bank; done pulses with class_id valid and
// held until the next start. Timing: N_CLASSES + 3 clocks from start to done.
// The maximum in place of Softmax follows the paper; the tie rule is this
// design's choice.
module result_module
  import lwdd_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              in_bank,
  output logic              busy,
  output logic              done,
  output logic [1:0]        rd_sel,
  output logic [WDB_AW-1:0] rd_addr,
  input  data_t             rdata,
  output logic [3:0]        class_id,
  output data_t             class_score
);
  logic       run;
  logic [3:0] i, d_i;
  logic       d_v;
  logic [1:0] drain;
  data_t      best;
  logic [3:0] best_i;

  assign rd_sel  = {1'b1, in_bank};
  assign rd_addr = WDB_AW'(i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; busy <= 1'b0; done <= 1'b0; i <= '0; d_i <= '0; d_v <= 1'b0;
      drain <= '0; best <= '0; best_i <= '0; class_id <= '0; class_score <= '0;
    end else begin
      done <= 1'b0;
      d_v  <= 1'b0;
      if (start && !busy) begin
        run <= 1'b1; busy <= 1'b1; i <= '0;
      end else if (run) begin
        d_v <= 1'b1;
        d_i <= i;
        if (i == 4'(N_CLASSES - 1)) begin run <= 1'b0; drain <= 2'd1; end
        else i <= i + 1'b1;
      end else if (busy) begin
        drain <= drain - 1'b1;
        if (drain == 2'd0) begin
          busy <= 1'b0; done <= 1'b1; class_id <= best_i; class_score <= best;
        end
      end
      if (d_v && (d_i == 4'd0 || rdata > best)) begin
        best   <= rdata;
        best_i <= d_i;
      end
    end
  end
endmodule
