// rue_top_tb -- end-to-end test of the Roots-of-Unity Equalizer at its
// default size (MAX_TAPS = 256, NR = 30).
//
// The testbench stands in for the dispersion-estimation microcontroller and
// for the links on either side. For each scenario it waits until the
// equalizer has drained, rewrites the whole mapping r[k] through the mapping
// port without resetting the core (a run-time update), and streams 16-QAM
// samples. Scenarios:
//   * fiber lengths of 1, 2, 4 and 8 spans of 80 km. The filter lengths
//     N = 29, 55, 108 and 214 follow the usual tap count for the dispersion
//     of standard fiber (D = 16.8 ps/nm/km, 1550 nm, 32 GBd at 2 samples per
//     symbol) reduced to 60% plus two taps. The roots come from the scanning
//     rule phi[k] = (pi/4 + pi*alpha*k^2) mod 2pi, alpha = 1/(N-1),
//     r[k] = round(phi[k] / 12 deg) mod 30, with k counted from the centre
//     tap; taps N..255 are marked unused;
//   * all 256 taps used with random roots, output shift 0 (saturation).
// Each scenario runs one phase with the input always valid and the output
// always ready (checking the 290-cycle latency and sample period exactly),
// then one phase with random input gaps and output back-pressure.
//
// Every output is compared bit-exactly with a model that forms the pre-sums
// and applies Horner's rule with ordinary multiplication, and the model's
// unscaled result is compared with the direct convolution
// sum_k x[n-k] exp(j*12deg*r[k]) in real arithmetic. The test counts how
// often each mechanism happened (unused taps, mapping updates, input gaps,
// input back-pressure, output stalls, saturation) and fails if one never did.
module rue_top_tb;
  import rue_pkg::*;

  localparam int MT   = MAX_TAPS_DEFAULT;
  localparam int NRT  = NR_DEFAULT;
  localparam int LAT  = MT + NRT + 4;  // clocks from acceptance to out_valid
  localparam real PI  = 3.14159265358979;
  // scenarios: spans of 80 km and the filter length used for each
  localparam int SPANS [4] = '{1, 2, 4, 8};
  localparam int TAPS  [4] = '{29, 55, 108, 214};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic       in_valid, in_ready, out_valid, out_ready;
  sample_t    in_sample, out_sample;
  logic       map_wr_en;
  logic [7:0] map_wr_k;
  map_entry_t map_wr_entry;
  logic [4:0] out_shift;

  rue_top dut (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_sample,
    .map_wr_en, .map_wr_k, .map_wr_entry,
    .out_shift,
    .out_valid, .out_ready, .out_sample
  );

  // ---------------------------------------------------------------- model
  sample_t    hist [MT];   // hist[k] = x[n-k]
  map_entry_t mmap [MT];
  typedef struct {
    longint re, im;
    longint cyc;
    bit     strict;        // latency must be exactly LAT
  } exp_t;
  exp_t expq [$];

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_unused_outputs = 0, n_map_updates = 0, n_in_gaps = 0, n_in_backpressure = 0;
  int n_out_stalls = 0, n_saturated = 0, n_outputs = 0, n_period_checks = 0;
  bit strict_phase = 0;
  longint last_accept = -1;

  function automatic longint sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // Reference output for the window now in hist[] and the mapping in mmap[].
  task automatic compute_expected(output longint yr, output longint yi, output bit unused_seen);
    longint sr [NRT], si [NRT];
    longint ar, ai, tr, ti;
    real fr, fi, ang, tol, mag;
    unused_seen = 0;
    for (int j = 0; j < NRT; j++) begin sr[j] = 0; si[j] = 0; end
    fr = 0.0; fi = 0.0; mag = 0.0;
    for (int k = 0; k < MT; k++) begin
      if (mmap[k].used && int'(mmap[k].root) < NRT) begin
        sr[mmap[k].root] += longint'(hist[k].re);
        si[mmap[k].root] += longint'(hist[k].im);
        ang = 2.0 * PI * real'(mmap[k].root) / real'(NRT);
        fr += real'(hist[k].re) * $cos(ang) - real'(hist[k].im) * $sin(ang);
        fi += real'(hist[k].re) * $sin(ang) + real'(hist[k].im) * $cos(ang);
        mag += ((hist[k].re < 0) ? -real'(hist[k].re) : real'(hist[k].re)) +
               ((hist[k].im < 0) ? -real'(hist[k].im) : real'(hist[k].im));
      end else begin
        unused_seen = 1;
      end
    end
    ar = 0; ai = 0;
    for (int j = NRT - 1; j >= 0; j--) begin
      tr = (ar * THETA_COS_Q - ai * THETA_SIN_Q + 16384) >>> 15;
      ti = (ar * THETA_SIN_Q + ai * THETA_COS_Q + 16384) >>> 15;
      ar = sr[j] + tr;
      ai = si[j] + ti;
    end
    // The root approximation is exact up to rounding: NR half-LSB steps plus
    // the Q1.15 error of theta_1 compounded over up to NR rotations.
    tol = real'(NRT) + 2e-4 * mag;
    checks++;
    if (real'(ar) - fr > tol || fr - real'(ar) > tol || real'(ai) - fi > tol || fi - real'(ai) > tol) begin
      failures++;
      $display("FAIL model vs direct convolution: (%0d,%0d) vs (%f,%f)", ar, ai, fr, fi);
    end
    yr = ar;
    yi = ai;
  endtask

  // input monitor: update the model on every accepted sample
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      exp_t e;
      longint yr, yi;
      bit un;
      for (int k = MT - 1; k > 0; k--) hist[k] = hist[k - 1];
      hist[0] = in_sample;
      compute_expected(yr, yi, un);
      if (un) n_unused_outputs++;
      e.re = sat16(yr >>> out_shift);
      e.im = sat16(yi >>> out_shift);
      if (e.re != (yr >>> out_shift) || e.im != (yi >>> out_shift)) n_saturated++;
      e.cyc = cycle;
      e.strict = strict_phase;
      expq.push_back(e);
      if (strict_phase && last_accept >= 0) begin
        checks++;
        n_period_checks++;
        if (cycle - last_accept != longint'(LAT)) begin
          failures++;
          $display("FAIL sample period %0d, expected %0d", cycle - last_accept, LAT);
        end
      end
      last_accept = cycle;
    end
    if (in_valid && !in_ready) n_in_backpressure++;
    if (!in_valid && in_ready) n_in_gaps++;
    if (out_valid && !out_ready) n_out_stalls++;
  end

  // output monitor
  logic out_valid_q = 0;
  longint valid_since = 0;
  always @(posedge clk) if (rst_n) begin
    out_valid_q <= out_valid;
    if (out_valid && !out_valid_q) valid_since = cycle;
    if (out_valid && out_ready) begin
      exp_t e;
      n_outputs++;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL output with no sample pending");
      end else begin
        e = expq.pop_front();
        if (longint'(out_sample.re) != e.re || longint'(out_sample.im) != e.im) begin
          failures++;
          $display("FAIL output %0d got (%0d,%0d) expected (%0d,%0d)", n_outputs,
                   out_sample.re, out_sample.im, e.re, e.im);
        end
        if (e.strict) begin
          checks++;
          if (valid_since - e.cyc != longint'(LAT)) begin
            failures++;
            $display("FAIL latency %0d, expected %0d", valid_since - e.cyc, LAT);
          end
        end
      end
    end
  end

  // ------------------------------------------------------------- stimulus
  function automatic logic signed [15:0] qam16();
    int lv;
    lv = $urandom_range(0, 3);
    return 16'(((2 * lv) - 3) * 8192);
  endfunction

  // Microcontroller stand-in: write the whole mapping while the core is idle.
  task automatic write_mapping(int n_taps, bit random_roots);
    real alpha, kc, phi, step;
    map_entry_t e;
    alpha = 1.0 / real'(n_taps - 1);
    step  = 2.0 * PI / real'(NRT);
    for (int k = 0; k < MT; k++) begin
      e = '0;
      if (k < n_taps) begin
        e.used = 1;
        if (random_roots) begin
          e.root = 5'($urandom_range(0, NRT - 1));
        end else begin
          kc  = real'(k) - real'(n_taps - 1) / 2.0;
          phi = PI / 4.0 + PI * alpha * kc * kc;
          phi = phi - 2.0 * PI * $floor(phi / (2.0 * PI));
          e.root = 5'(int'($floor(phi / step + 0.5)) % NRT);
        end
      end
      @(negedge clk);
      map_wr_en    = 1;
      map_wr_k     = 8'(k);
      map_wr_entry = e;
      mmap[k]      = e;
    end
    @(negedge clk);
    map_wr_en = 0;
    n_map_updates++;
  endtask

  task automatic drain();
    int guard;
    in_valid = 0;
    guard = 0;
    while ((expq.size() != 0 || out_valid) && guard < 20 * LAT) begin
      @(negedge clk);
      guard++;
    end
    repeat (4) @(negedge clk);
  endtask

  task automatic stream(int n, bit strict);
    int sent;
    strict_phase = strict;
    last_accept  = -1;
    sent = 0;
    while (sent < n) begin
      @(negedge clk);
      if (strict || $urandom_range(0, 3) != 0) begin
        in_valid     = 1;
        in_sample.re = qam16();
        in_sample.im = qam16();
        @(posedge clk);
        if (in_ready) sent++;
      end else begin
        in_valid = 0;
        repeat ($urandom_range(1, 400)) @(negedge clk);
      end
    end
    @(negedge clk);
    in_valid = 0;
    drain();
    strict_phase = 0;
  endtask

  // output back-pressure: none in strict phases, random otherwise
  always @(negedge clk) out_ready <= strict_phase ? 1'b1 : ($urandom_range(0, 2) == 0);

  initial begin
    // 6 scenarios x 2 phases x 40 samples x ~(290..900) cycles, with margin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_sample = '0; map_wr_en = 0; map_wr_k = '0; map_wr_entry = '0;
    out_shift = 5'd3;
    for (int k = 0; k < MT; k++) begin hist[k] = '0; mmap[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Before any mapping is written every tap is unused: the output is zero.
    stream(3, 1);
    for (int s = 0; s < 4; s++) begin
      write_mapping(TAPS[s], 0);
      $display("scenario %0d spans: N = %0d taps", SPANS[s], TAPS[s]);
      stream(40, 1);
      stream(40, 0);
    end
    out_shift = 5'd0;
    write_mapping(MT, 1);
    $display("scenario: all %0d taps, random roots, no output shift", MT);
    stream(40, 1);
    stream(40, 0);
    drain();
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); end
    $display("outputs %0d, period checks %0d", n_outputs, n_period_checks);
    $display("mechanisms: unused-tap outputs %0d, mapping updates %0d, input gap cycles %0d,",
             n_unused_outputs, n_map_updates, n_in_gaps);
    $display("            input back-pressure cycles %0d, output stall cycles %0d, saturated %0d",
             n_in_backpressure, n_out_stalls, n_saturated);
    checks++;
    if (n_unused_outputs == 0 || n_map_updates < 2 || n_in_gaps == 0 || n_in_backpressure == 0 ||
        n_out_stalls == 0 || n_saturated == 0 || n_period_checks == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
