// layer_sequencer: runs the layers of the model one after another.
//
// The accelerator has one hardware component per layer of the model but only
// one of them works at a time; each reads the buffer written by the one before.
// This controller walks through the fixed schedule of stage_e (input linear,
// positional encoding, Q, K, V, score, Softmax, attention, output projection,
// residual add, BN, FFN1 with ReLU, FFN2, residual add, BN, pooling, output
// linear). On entering a stage it pulses stage_start for one clock; it moves
// on when the active component pulses stage_done. The order follows the
// model; running Q, K and V one after another instead of in parallel is this
// design's choice.
//
// Interface: start (accepted while idle) begins an inference; busy is high
// until done pulses, one clock after the last component finished. stage
// names the active component.
module layer_sequencer
  import tt_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   stage_done,
  output stage_e stage,
  output logic   stage_start,
  output logic   busy,
  output logic   done
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      stage <= ST_IDLE; stage_start <= 1'b0; done <= 1'b0;
    end else begin
      stage_start <= 1'b0;
      done        <= 1'b0;
      unique case (stage)
        ST_IDLE: if (start) begin
          stage <= ST_LIN_IN; stage_start <= 1'b1;
        end
        ST_DONE: begin
          done <= 1'b1; stage <= ST_IDLE;
        end
        default: if (stage_done) begin
          if (stage == ST_LIN_OUT) stage <= ST_DONE;
          else begin
            stage <= stage_e'(stage + 1'b1);
            stage_start <= 1'b1;
          end
        end
      endcase
    end
  end

  assign busy = (stage != ST_IDLE);

  a_done_in_stage: assert property (@(posedge clk) disable iff (!rst_n)
                                    stage_done |-> (stage != ST_IDLE && stage != ST_DONE));
endmodule
