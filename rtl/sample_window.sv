// sample_window -- sliding window of the most recent input samples.
//
// The equalizer recomputes every output from the last MAX_TAPS input samples
// x[n], x[n-1], ..., x[n-MAX_TAPS+1]. This buffer keeps them in a circular
// register array (no block RAM): "push" writes din one place after the newest
// entry, and the asynchronous read port returns x[n - rd_k], so rd_k = 0 is
// the newest sample. Reset fills the window with zeros, so the first outputs
// see a zero history.
//
// Timing: a push is visible on the read port in the following cycle.
// The paper states that the input samples are read sequentially for the
// pre-sum; the circular register buffer is this design's choice.
module sample_window
  import rue_pkg::*;
#(
  parameter int MAX_TAPS = MAX_TAPS_DEFAULT,
  localparam int KW = (MAX_TAPS > 1) ? $clog2(MAX_TAPS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  sample_t       din,
  input  logic [KW-1:0] rd_k,
  output sample_t       dout
);

  sample_t       mem [MAX_TAPS];
  logic [KW-1:0] wptr;       // position of the newest sample
  logic [KW-1:0] wptr_next;
  logic [KW-1:0] rd_idx;

  always_comb begin
    wptr_next = (wptr == KW'(MAX_TAPS - 1)) ? '0 : wptr + 1'b1;
    // (wptr - rd_k) mod MAX_TAPS, valid for any MAX_TAPS
    if (wptr >= rd_k) rd_idx = wptr - rd_k;
    else              rd_idx = KW'(MAX_TAPS) - (rd_k - wptr);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr <= '0;
      for (int i = 0; i < MAX_TAPS; i++) mem[i] <= '0;
    end else if (push) begin
      wptr            <= wptr_next;
      mem[wptr_next]  <= din;
    end
  end

  assign dout = mem[rd_idx];

endmodule
