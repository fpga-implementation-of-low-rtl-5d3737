// rue_controller -- sequences the computation of one recovered sample.
//
// For every accepted input sample the equalizer runs one full filter
// evaluation, strictly in sequence:
//   IDLE    in_ready = 1. A sample with in_valid is written into the sample
//           window (push) and the pre-sum pass is started (ps_start).
//   PRESUM  wait for ps_done; then start the Horner pass (ml_start).
//   ROTATE  wait for ml_done.
//   OUTPUT  wait until the output control is free (!oc_busy), then load it
//           (oc_load) and return to IDLE. A receiver that holds off
//           out_ready therefore stalls the input as well.
// One output is produced per input sample (the filter runs at the input
// sampling rate). With the default sizes a sample takes
// MAX_TAPS + NR + 4 = 290 clocks from acceptance to out_valid, and a new
// sample is accepted every 290 clocks when the output is not stalled.
//
// The controller is this design's own; the paper describes the two stages
// but not how they are sequenced. Single buffering of the pre-sum vector
// follows the single pre-sum memory of the paper's architecture.
module rue_controller
  import rue_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  output logic push,
  output logic ps_start,
  input  logic ps_done,
  output logic ml_start,
  input  logic ml_done,
  output logic oc_load,
  input  logic oc_busy,
  output ctrl_state_t state
);

  ctrl_state_t state_next;

  always_comb begin
    state_next = state;
    in_ready   = 1'b0;
    push       = 1'b0;
    ps_start   = 1'b0;
    ml_start   = 1'b0;
    oc_load    = 1'b0;
    unique case (state)
      ST_IDLE: begin
        in_ready = 1'b1;
        if (in_valid) begin
          push       = 1'b1;
          ps_start   = 1'b1;
          state_next = ST_PRESUM;
        end
      end
      ST_PRESUM: begin
        if (ps_done) begin
          ml_start   = 1'b1;
          state_next = ST_ROTATE;
        end
      end
      ST_ROTATE: begin
        if (ml_done) state_next = ST_OUTPUT;
      end
      ST_OUTPUT: begin
        if (!oc_busy) begin
          oc_load    = 1'b1;
          state_next = ST_IDLE;
        end
      end
      default: state_next = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) state <= ST_IDLE;
    else        state <= state_next;
  end

endmodule
