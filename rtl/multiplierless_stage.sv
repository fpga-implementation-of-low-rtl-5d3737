// multiplierless_stage -- evaluates sum_j X^S_j * theta_1^j by Horner's rule.
//
// Because theta_j = theta_1^j, the filter output can be written
//     Y = X^S_0 + theta_1 (X^S_1 + theta_1 (X^S_2 + ... + theta_1 X^S_{NR-1}))
// so one constant rotation serves every root. A "start" pulse clears the
// accumulator and selects j = NR-1; then each clock the multiplexer picks
// X^S_j and acc <= X^S_j + theta_1 * acc, down to j = 0. The rotation is
// the shift-and-add theta_rotator.
//
// Timing: start in cycle t -> steps in cycles t+1..t+NR -> done is high for
// one cycle in t+NR+1 with the result on y_re / y_im, which holds until the
// next start. vec must stay unchanged during the pass.
//
// Following the paper: the MUX / Sigma / theta feedback loop and the
// recursion order. One root per clock and the accumulator width are this
// design's choices.
module multiplierless_stage
  import rue_pkg::*;
#(
  parameter int NR    = NR_DEFAULT,
  parameter int ACC_W = 26,
  localparam int JW = (NR > 1) ? $clog2(NR) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic signed [ACC_W-1:0] vec_re [NR],
  input  logic signed [ACC_W-1:0] vec_im [NR],
  output logic                    busy,
  output logic                    done,
  output logic signed [ACC_W-1:0] y_re,
  output logic signed [ACC_W-1:0] y_im
);

  logic [JW-1:0]           j;
  logic signed [ACC_W-1:0] rot_re, rot_im;
  logic signed [ACC_W-1:0] sel_re, sel_im;

  theta_rotator #(.W(ACC_W)) u_theta (
    .a_re(y_re), .a_im(y_im), .y_re(rot_re), .y_im(rot_im)
  );

  // The multiplexer over the pre-sum vector.
  assign sel_re = vec_re[j];
  assign sel_im = vec_im[j];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      j    <= '0;
      y_re <= '0;
      y_im <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        j    <= JW'(NR - 1);
        y_re <= '0;
        y_im <= '0;
      end else if (busy) begin
        y_re <= sel_re + rot_re;
        y_im <= sel_im + rot_im;
        if (j == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          j <= j - 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start)
    else $error("multiplierless_stage: start while busy");

endmodule
