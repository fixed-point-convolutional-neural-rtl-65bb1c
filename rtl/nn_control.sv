// nn_control: the "Control module" of the network. It holds the sequence
// and parameters of the layers (the layer table in lwdd_pkg) and runs one
// inference:
//   image load -> for each layer: [weight load] -> layer -> ... -> result.
// Convolution and dense layers first have their weights copied into the
// RAM module; pooling layers have no weights. Feature maps ping-pong between
// the two banks: the image is loaded into bank 0, layer i reads bank i%2
// and writes the other, and the result module reads the dense outputs from
// bank 1.
//
// Interface: start pulse begins an inference when idle; for each stage a
// one-clock start pulse goes to the owning unit and the module waits for
// that unit's done pulse. phase names the stage in progress (it also steers
// the shared ports in nn_core); layer and in_bank describe the current
// layer. done pulses when the class is ready. The stage order follows the
// paper's stage table; one idle clock is spent between stages.
module nn_control
  import lwdd_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  output logic   busy,
  output logic   done,
  output phase_e phase,
  output layer_t layer,
  output logic   in_bank,
  output logic   rc_start,
  output logic   rc_img,
  output logic   conv_start,
  output logic   pool_start,
  output logic   dense_start,
  output logic   res_start,
  input  logic   rc_done,
  input  logic   conv_done,
  input  logic   pool_done,
  input  logic   dense_done,
  input  logic   res_done
);
  logic [3:0] li;        // layer index
  logic       issue;     // start pulse of the current stage still to send
  logic       stage_done;

  assign layer   = layer_cfg(int'(li));
  assign in_bank = li[0];
  assign rc_img  = (phase == PH_IMG);
  assign stage_done = rc_done | conv_done | pool_done | dense_done | res_done;

  always_comb begin
    rc_start    = issue && (phase == PH_IMG || phase == PH_WGT);
    conv_start  = issue && (phase == PH_CONV);
    pool_start  = issue && (phase == PH_POOL);
    dense_start = issue && (phase == PH_DENSE);
    res_start   = issue && (phase == PH_RESULT);
  end

  function automatic phase_e run_phase(input layer_t l);
    case (l.op)
      OP_CONV: return PH_CONV;
      OP_POOL: return PH_POOL;
      default: return PH_DENSE;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE; li <= '0; issue <= 1'b0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done  <= 1'b0;
      issue <= 1'b0;
      case (phase)
        PH_IDLE: if (start) begin
          phase <= PH_IMG; li <= '0; issue <= 1'b1; busy <= 1'b1;
        end
        PH_IMG: if (rc_done) begin
          // first layer of LWDD is a convolution: load its weights
          phase <= PH_WGT; issue <= 1'b1;
        end
        PH_WGT: if (rc_done) begin
          phase <= run_phase(layer); issue <= 1'b1;
        end
        PH_CONV, PH_POOL, PH_DENSE: if (stage_done) begin
          if (li == 4'(N_LAYERS - 1)) begin
            phase <= PH_RESULT; issue <= 1'b1;
          end else begin
            li    <= li + 1'b1;
            issue <= 1'b1;
            phase <= (layer_cfg(int'(li) + 1).op == OP_POOL) ? PH_POOL : PH_WGT;
          end
        end
        PH_RESULT: if (res_done) begin
          phase <= PH_IDLE; busy <= 1'b0; done <= 1'b1;
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end
endmodule
