// rue_pkg -- shared constants and types of the Roots-of-Unity Equalizer (RUE).
//
// The equalizer replaces every tap of a chromatic-dispersion FIR filter by
// the nearest of NR equally spaced unit-magnitude roots theta_j = exp(j*2*pi*j/NR).
// With NR = 30 (a 12 degree step) the whole filter needs only one constant,
// theta_1, which is applied with shifts and adds.
//
// Following the paper: NR = 30 roots and 16-bit signals and taps.
// Design choices of this implementation: theta_1 is held in Q1.15
// (THETA_COS_Q = round(cos(12 deg) * 2^15), THETA_SIN_Q = round(sin(12 deg) * 2^15)),
// a mapping entry is a "used" flag plus a 5-bit root index, and the
// controller states listed below.
package rue_pkg;

  // Number of roots of unity (paper: 30, angle of theta_1 = 12 degrees).
  localparam int NR_DEFAULT = 30;
  // Width of a root index; NR must not exceed 2**ROOT_W.
  localparam int ROOT_W = 5;
  // Input / output sample width per real component (paper: 16 bits).
  localparam int IN_W = 16;
  // Default maximum filter length (taps). Covers about 8 spans of SSMF.
  localparam int MAX_TAPS_DEFAULT = 256;
  // Fraction bits of the quantized rotation constant (16-bit signed taps).
  localparam int THETA_FRAC = 15;
  // theta_1 = cos(12 deg) + j sin(12 deg) in Q1.15.
  localparam int THETA_COS_Q = 32052;
  localparam int THETA_SIN_Q = 6813;

  // One complex input or output sample.
  typedef struct packed {
    logic signed [IN_W-1:0] re;
    logic signed [IN_W-1:0] im;
  } sample_t;

  // One entry of the tap-to-root mapping r[k]. A tap whose "used" bit is 0
  // belongs to no root: it is one of the taps beyond the filter length the
  // current dispersion needs, and contributes nothing.
  typedef struct packed {
    logic              used;
    logic [ROOT_W-1:0] root;
  } map_entry_t;

  // States of the per-output sequencer.
  typedef enum logic [1:0] {
    ST_IDLE   = 2'd0,  // waiting for an input sample
    ST_PRESUM = 2'd1,  // pre-sum pass over all taps
    ST_ROTATE = 2'd2,  // Horner pass over all roots
    ST_OUTPUT = 2'd3   // handing the result to the output control
  } ctrl_state_t;

endpackage
