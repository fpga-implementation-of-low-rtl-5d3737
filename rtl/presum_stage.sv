// presum_stage -- groups the input samples by root (the "pre-sum").
//
// With every tap approximated by a root theta_j, the filter output is
//     Y = sum_k x[n-k] * theta_{r[k]} = sum_j X^S_j * theta_j,
//     X^S_j = sum of the samples x[n-k] whose tap k maps to root j.
// This stage builds the pre-sum vector X^S_0..X^S_{NR-1}. A "start" pulse
// clears the NR complex registers; then, one tap per clock for
// k = 0..MAX_TAPS-1, it presents tap_k to the sample window and the mapping
// memory, and adds the returned sample x[n-k] into X^S_{r[k]} (a
// read-modify-write through a demultiplexer on the root index). Unused taps
// add nothing. Every pass walks all MAX_TAPS entries, so the timing does not
// depend on the dispersion being equalized.
//
// Timing: start in cycle t -> accumulation in cycles t+1..t+MAX_TAPS ->
// done is high for one cycle in t+MAX_TAPS+1, when vec holds the result.
// vec stays unchanged until the next start.
//
// Following the paper: the Sigma / MUX-DEMUX / pre-sum vector loop driven by
// r[k], and the fixed pass length. One tap per clock, register storage and
// the accumulator width ACC_W (no overflow for MAX_TAPS full-scale samples)
// are this design's choices.
module presum_stage
  import rue_pkg::*;
#(
  parameter int MAX_TAPS = MAX_TAPS_DEFAULT,
  parameter int NR       = NR_DEFAULT,
  parameter int ACC_W    = IN_W + $clog2(MAX_TAPS) + 2,
  localparam int KW = (MAX_TAPS > 1) ? $clog2(MAX_TAPS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  output logic [KW-1:0]           tap_k,
  input  sample_t                 x,
  input  map_entry_t              map,
  output logic signed [ACC_W-1:0] vec_re [NR],
  output logic signed [ACC_W-1:0] vec_im [NR]
);

  logic last_tap;
  assign last_tap = (tap_k == KW'(MAX_TAPS - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      tap_k <= '0;
      for (int j = 0; j < NR; j++) begin
        vec_re[j] <= '0;
        vec_im[j] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        tap_k <= '0;
        for (int j = 0; j < NR; j++) begin
          vec_re[j] <= '0;
          vec_im[j] <= '0;
        end
      end else if (busy) begin
        if (map.used && (32'(map.root) < NR)) begin
          vec_re[map.root] <= vec_re[map.root] + ACC_W'(x.re);
          vec_im[map.root] <= vec_im[map.root] + ACC_W'(x.im);
        end
        if (last_tap) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          tap_k <= '0;
        end else begin
          tap_k <= tap_k + 1'b1;
        end
      end
    end
  end

  // A pass must not be restarted while it runs.
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start)
    else $error("presum_stage: start while busy");

endmodule
