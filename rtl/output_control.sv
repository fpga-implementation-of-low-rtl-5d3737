// output_control -- the switch that releases recovered samples.
//
// When "load" is high (and no sample is waiting) the accumulator-width result
// is scaled by an arithmetic right shift of "shift" bits, rounded towards
// minus infinity, saturated to OUT_W bits per component and registered; the
// sample is then offered with out_valid until out_ready takes it. "busy" is
// out_valid: the controller must not load a new result until the previous
// one has left. A constant gain is harmless here because the adaptive
// equalizer that follows in a coherent receiver removes it; the shift lets
// the output use the full 16-bit range.
//
// Timing: load in cycle t -> out_valid from cycle t+1 until accepted.
// Following the paper: an output control stage and 16-bit signals. The
// handshake, the shift and the saturation are this design's choices.
module output_control
  import rue_pkg::*;
#(
  parameter int ACC_W = 26,
  parameter int OUT_W = IN_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic signed [ACC_W-1:0] y_re,
  input  logic signed [ACC_W-1:0] y_im,
  input  logic [4:0]              shift,
  output logic                    busy,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic signed [OUT_W-1:0] out_re,
  output logic signed [OUT_W-1:0] out_im
);

  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((64'sd1 <<< (OUT_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(64'sd1 <<< (OUT_W - 1));

  function automatic logic signed [OUT_W-1:0] scale_sat(logic signed [ACC_W-1:0] v,
                                                        logic [4:0] sh);
    logic signed [ACC_W-1:0] s;
    s = v >>> sh;
    if (s > MAXV)      return MAXV[OUT_W-1:0];
    else if (s < MINV) return MINV[OUT_W-1:0];
    else               return s[OUT_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      if (load && !out_valid) begin
        out_valid <= 1'b1;
        out_re    <= scale_sat(y_re, shift);
        out_im    <= scale_sat(y_im, shift);
      end else if (out_valid && out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  assign busy = out_valid;

  // Valid/ready rules: an offered sample stays offered and unchanged.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_re) && $stable(out_im))
    else $error("output_control: offered sample changed before it was taken");

endmodule
