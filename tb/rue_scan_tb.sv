// rue_scan_tb -- dispersion scanning with the default-size equalizer in the
// loop, as the external estimation controller would run it.
//
// The controller does not know the fiber length. It tries filter lengths N
// and, for each one, writes the mapping
//     phi[k] = (pi/4 + pi*alpha*k^2) mod 2*pi,   k = tap - (N-1)/2,
//     r[k]   = round(phi[k] / 12 deg) mod 30,    taps 0..N-1 used,
// runs the equalizer on the received signal and keeps the N with the best
// quality. Here the quality is the SNR of the symbol-spaced output after a
// complex least-squares gain, because the channel has no noise and the bit
// error rate would be zero for most N.
//
// The phase curvature used is alpha = 1/(N-1). This is the curvature of the
// ideal dispersion filter when N is the usual tap count,
// N - 1 ~ D*lambda^2*z/(c*T^2). A scan over N therefore finds the fiber
// length, with its minimum near that tap count. The curvature
// alpha = sqrt(1/(N-1)) is also evaluated at the best N and reported for
// comparison.
//
// For 1, 2 and 4 spans (usual tap counts 45, 89 and 177, all within the 256
// taps built) the scan steps N in odd values up to 1.4 times the usual
// count, in steps of 2 x spans, then refines in steps of 2 around the best
// value: the longer the filter, the more a small change of N moves its
// outer taps.
// A span passes if the best N lies within 20% of the usual count and its SNR
// is at least 12 dB.
module rue_scan_tb;
  import rue_pkg::*;
  import cd_sim_pkg::*;

  localparam int MT    = MAX_TAPS_DEFAULT;
  localparam int NRT   = NR_DEFAULT;
  localparam int L     = 1024;        // periodic signal block
  localparam int NEVAL = 512;         // outputs evaluated per scan step
  localparam int SPANS [3] = '{1, 2, 4};

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

  int y_re[], y_im[];
  int n_out;
  real sym_re[], sym_im[];
  int  q_re[], q_im[];

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (n_out < y_re.size()) begin
      y_re[n_out] = int'(out_sample.re);
      y_im[n_out] = int'(out_sample.im);
    end
    n_out++;
  end
  assign out_ready = 1'b1;

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Write the scanning mapping for filter length n with curvature alpha.
  task automatic write_scan_mapping(int n, real alpha);
    map_entry_t e;
    real kc, phi;
    for (int k = 0; k < MT; k++) begin
      e = '0;
      if (k < n) begin
        kc  = real'(k) - real'(n - 1) / 2.0;
        phi = PI / 4.0 + PI * alpha * kc * kc;
        phi = phi - 2.0 * PI * $floor(phi / (2.0 * PI));
        e.used = 1;
        e.root = 5'(int'($floor(phi / (2.0 * PI / real'(NRT)) + 0.5)) % NRT);
      end
      @(negedge clk);
      map_wr_en = 1; map_wr_k = 8'(k); map_wr_entry = e;
    end
    @(negedge clk);
    map_wr_en = 0;
  endtask

  // Run MT + NEVAL samples through the equalizer; return the output SNR for
  // a filter of n taps (output delay (n-1)/2).
  task automatic run_and_measure(int n, output real snr);
    int idx[];
    real sr[], si[];
    int c, cnt, e_tmp;
    out_shift = 5'(int'($floor($ln($sqrt(real'(n))) / $ln(2.0))));
    n_out = 0;
    for (int i = 0; i < MT + NEVAL; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_sample.re = 16'(q_re[i % L]);
      in_sample.im = 16'(q_im[i % L]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0;
    while (n_out < MT + NEVAL) @(negedge clk);
    c = (n - 1) / 2;
    idx = new[NEVAL / 2];
    sr  = new[NEVAL / 2];
    si  = new[NEVAL / 2];
    cnt = 0;
    for (int o = MT; o < MT + NEVAL; o++) begin
      if (((o - c) % 2) == 0 && cnt < NEVAL / 2) begin
        idx[cnt] = o;
        sr[cnt]  = sym_re[((o - c) / 2) % (L / 2)];
        si[cnt]  = sym_im[((o - c) / 2) % (L / 2)];
        cnt++;
      end
    end
    idx = new[cnt] (idx);
    sr  = new[cnt] (sr);
    si  = new[cnt] (si);
    fit_snr(y_re, y_im, idx, sr, si, snr, e_tmp);
  endtask

  initial begin
    real z, snr, best_snr, snr_sqrt;
    int  nopt, nmax, step, best_n, steps;

    in_valid = 0; in_sample = '0; map_wr_en = 0; map_wr_k = '0; map_wr_entry = '0;
    out_shift = '0; n_out = 0;
    y_re = new[MT + NEVAL];
    y_im = new[MT + NEVAL];
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int sc = 0; sc < 3; sc++) begin
      z    = real'(SPANS[sc]) * SPAN_M;
      nopt = cd_taps(z);
      nmax = int'(1.4 * real'(nopt));
      if (nmax > MT - 1) nmax = MT - 1;
      step = 2 * SPANS[sc];
      make_signal(L, z, sym_re, sym_im, q_re, q_im);
      best_snr = -100.0;
      best_n   = 0;
      steps    = 0;
      for (int n = 5; n <= nmax; n += step) begin
        write_scan_mapping(n, 1.0 / real'(n - 1));
        run_and_measure(n, snr);
        steps++;
        if (snr > best_snr) begin best_snr = snr; best_n = n; end
      end
      // fine pass in steps of 2 around the coarse optimum
      begin
        int lo, hi;
        lo = (best_n - step + 2 < 5) ? 5 : best_n - step + 2;
        hi = (best_n + step - 2 > MT - 1) ? MT - 1 : best_n + step - 2;
        for (int n = lo; n <= hi; n += 2) begin
          if (n == best_n) continue;
          write_scan_mapping(n, 1.0 / real'(n - 1));
          run_and_measure(n, snr);
          steps++;
          if (snr > best_snr) begin best_snr = snr; best_n = n; end
        end
      end
      write_scan_mapping(best_n, $sqrt(1.0 / real'(best_n - 1)));
      run_and_measure(best_n, snr_sqrt);
      $display("%0d span(s): %0d scan steps, best N = %0d (usual tap count %0d), SNR %.1f dB; with alpha = sqrt(1/(N-1)): %.1f dB",
               SPANS[sc], steps, best_n, nopt, best_snr, snr_sqrt);
      checks++;
      if (best_n < int'(0.8 * real'(nopt)) || best_n > int'(1.2 * real'(nopt)) || best_snr < 12.0) begin
        failures++;
        $display("FAIL scan did not find the dispersion of %0d span(s)", SPANS[sc]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
