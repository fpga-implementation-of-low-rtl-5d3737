// rue_top -- Roots-of-Unity Equalizer (RUE): a multiplierless time-domain
// chromatic-dispersion equalizer for one polarization of a coherent receiver.
//
// Each tap k of the dispersion-compensating FIR filter is replaced by one of
// NR = 30 unit-magnitude roots of unity, theta_{r[k]} = exp(j*12deg*r[k]).
// The mapping r[k] is the only thing that depends on the fiber: it is
// computed off-chip (a microcontroller running a dispersion scan) and written
// through the map_wr_* port at any time. An output is then
//     Y = sum_j X^S_j theta_1^j,   X^S_j = sum_{k : r[k] = j} x[n-k],
// computed in two stages that never change with the dispersion:
//   pre-sum stage        sample_window + mapping_memory + presum_stage:
//                        one tap per clock, x[n-k] is added into X^S_{r[k]};
//   multiplierless stage multiplierless_stage (+ theta_rotator):
//                        Horner's rule with the one constant theta_1,
//                        applied with shifts and adds;
//   output control       output_control: scale, saturate, valid/ready.
// rue_controller runs these in sequence for every input sample.
//
// Interface: input stream in_valid/in_ready/in_sample (16-bit I and Q);
// output stream out_valid/out_ready/out_sample, one output per input; mapping
// write port map_wr_en/map_wr_k/map_wr_entry (entry = {used, 5-bit root});
// out_shift scales the output (arithmetic right shift before saturation).
// After reset every tap is unused and the window holds zeros.
// Timing: MAX_TAPS + NR + 4 clocks per sample (290 at the defaults).
//
// The architecture follows the paper; the sample window, the sequencing,
// the word widths, the rounding and the output scaling are this design's.
module rue_top
  import rue_pkg::*;
#(
  parameter int MAX_TAPS = MAX_TAPS_DEFAULT,
  parameter int NR       = NR_DEFAULT,
  parameter int ACC_W    = IN_W + $clog2(MAX_TAPS) + 2,
  localparam int KW = (MAX_TAPS > 1) ? $clog2(MAX_TAPS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // input samples
  input  logic          in_valid,
  output logic          in_ready,
  input  sample_t       in_sample,
  // mapping r[k], written by the dispersion-estimation microcontroller
  input  logic          map_wr_en,
  input  logic [KW-1:0] map_wr_k,
  input  map_entry_t    map_wr_entry,
  // output scaling
  input  logic [4:0]    out_shift,
  // recovered samples
  output logic          out_valid,
  input  logic          out_ready,
  output sample_t       out_sample
);

  logic          push, ps_start, ps_done, ps_busy;
  logic          ml_start, ml_done, ml_busy;
  logic          oc_load, oc_busy;
  logic [KW-1:0] tap_k;
  sample_t       win_x;
  map_entry_t    map_rd;
  ctrl_state_t   state;

  logic signed [ACC_W-1:0] vec_re [NR];
  logic signed [ACC_W-1:0] vec_im [NR];
  logic signed [ACC_W-1:0] y_re, y_im;

  rue_controller u_ctrl (
    .clk, .rst_n,
    .in_valid, .in_ready, .push,
    .ps_start, .ps_done,
    .ml_start, .ml_done,
    .oc_load, .oc_busy,
    .state
  );

  sample_window #(.MAX_TAPS(MAX_TAPS)) u_window (
    .clk, .rst_n,
    .push, .din(in_sample),
    .rd_k(tap_k), .dout(win_x)
  );

  mapping_memory #(.MAX_TAPS(MAX_TAPS), .NR(NR)) u_map (
    .clk, .rst_n,
    .wr_en(map_wr_en), .wr_k(map_wr_k), .wr_entry(map_wr_entry),
    .rd_k(tap_k), .rd_entry(map_rd)
  );

  presum_stage #(.MAX_TAPS(MAX_TAPS), .NR(NR), .ACC_W(ACC_W)) u_presum (
    .clk, .rst_n,
    .start(ps_start), .busy(ps_busy), .done(ps_done),
    .tap_k, .x(win_x), .map(map_rd),
    .vec_re, .vec_im
  );

  multiplierless_stage #(.NR(NR), .ACC_W(ACC_W)) u_ml (
    .clk, .rst_n,
    .start(ml_start), .vec_re, .vec_im,
    .busy(ml_busy), .done(ml_done),
    .y_re, .y_im
  );

  output_control #(.ACC_W(ACC_W), .OUT_W(IN_W)) u_out (
    .clk, .rst_n,
    .load(oc_load), .y_re, .y_im, .shift(out_shift),
    .busy(oc_busy),
    .out_valid, .out_ready,
    .out_re(out_sample.re), .out_im(out_sample.im)
  );

  // The two stages share the pre-sum vector and never run at the same time;
  // both are idle whenever the controller waits for input.
  assert property (@(posedge clk) disable iff (!rst_n) !(ps_busy && ml_busy))
    else $error("rue_top: pre-sum and Horner passes overlap");
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == ST_IDLE) |-> (!ps_busy && !ml_busy))
    else $error("rue_top: a stage is busy while the controller is idle");

endmodule
