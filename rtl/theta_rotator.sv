// theta_rotator -- multiplication by the constant theta_1 with shifts and adds.
//
// Computes y = a * theta_1 for complex a, where theta_1 = exp(j*12 deg) is
// held as the Q1.15 integers COS_Q and SIN_Q:
//     y_re = (a_re*COS_Q - a_im*SIN_Q + 2^(FRAC-1)) >>> FRAC
//     y_im = (a_re*SIN_Q + a_im*COS_Q + 2^(FRAC-1)) >>> FRAC
// No multiplier is used. Each constant is expanded at elaboration into its
// canonical signed digit (CSD) form, sum_i d_i 2^i with d_i in {-1,0,+1} and
// no two adjacent non-zero digits; every non-zero digit becomes one shifted
// copy of the operand that is added or subtracted. For the defaults:
//     32052 = 2^15 - 2^10 + 2^8 + 2^6 - 2^4 + 2^2          (6 terms)
//      6813 = 2^13 - 2^11 + 2^9 + 2^7 + 2^5 - 2^2 + 2^0    (7 terms)
// so one rotation costs 26 shifted terms summed into two results.
//
// Purely combinational. Following the paper: the rotation by the single
// constant theta_1 made only of shifts and additions. The Q1.15 constants,
// the CSD decomposition and round-half-up are this design's choices.
module theta_rotator
  import rue_pkg::*;
#(
  parameter int W     = 26,
  parameter int COS_Q = THETA_COS_Q,
  parameter int SIN_Q = THETA_SIN_Q,
  parameter int FRAC  = THETA_FRAC
) (
  input  logic signed [W-1:0] a_re,
  input  logic signed [W-1:0] a_im,
  output logic signed [W-1:0] y_re,
  output logic signed [W-1:0] y_im
);

  // Digits needed: the CSD form of a (FRAC+1)-bit constant may use one more.
  localparam int NDIG = FRAC + 3;
  localparam int PW   = W + NDIG + 1;

  // Digit "pos" of the CSD expansion of "value" (value >= 0).
  function automatic int csd_digit(int value, int pos);
    int x;
    int d;
    x = value;
    d = 0;
    for (int i = 0; i <= pos; i++) begin
      if ((x & 1) != 0) d = 2 - (x & 3);
      else              d = 0;
      x = (x - d) >>> 1;
    end
    return d;
  endfunction

  logic signed [PW-1:0] are, aim;
  logic signed [PW-1:0] t_rc [NDIG];  // a_re * COS_Q terms
  logic signed [PW-1:0] t_rs [NDIG];  // a_re * SIN_Q terms
  logic signed [PW-1:0] t_ic [NDIG];  // a_im * COS_Q terms
  logic signed [PW-1:0] t_is [NDIG];  // a_im * SIN_Q terms

  assign are = PW'(a_re);
  assign aim = PW'(a_im);

  for (genvar i = 0; i < NDIG; i++) begin : g_digit
    localparam int DC = csd_digit(COS_Q, i);
    localparam int DS = csd_digit(SIN_Q, i);
    assign t_rc[i] = (DC == 1) ? (are <<< i) : (DC == -1) ? -(are <<< i) : '0;
    assign t_ic[i] = (DC == 1) ? (aim <<< i) : (DC == -1) ? -(aim <<< i) : '0;
    assign t_rs[i] = (DS == 1) ? (are <<< i) : (DS == -1) ? -(are <<< i) : '0;
    assign t_is[i] = (DS == 1) ? (aim <<< i) : (DS == -1) ? -(aim <<< i) : '0;
  end

  logic signed [PW-1:0] s_re, s_im;

  always_comb begin
    s_re = PW'(1) <<< (FRAC - 1);  // rounding constant
    s_im = PW'(1) <<< (FRAC - 1);
    for (int i = 0; i < NDIG; i++) begin
      s_re = s_re + t_rc[i] - t_is[i];
      s_im = s_im + t_rs[i] + t_ic[i];
    end
  end

  assign y_re = W'(s_re >>> FRAC);
  assign y_im = W'(s_im >>> FRAC);

endmodule
