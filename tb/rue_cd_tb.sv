// rue_cd_tb -- equalization of real chromatic dispersion by the default-size
// Roots-of-Unity Equalizer, for 1, 2, 4 and 8 spans of 80 km.
//
// For each fiber length the testbench:
//   1. builds 2048 random 16-QAM symbols as a 2-samples-per-symbol signal of
//      L = 4096 samples, band-limited to the symbol rate, and applies the
//      exact dispersion of standard single-mode fiber in the frequency domain
//      (cd_sim_pkg). The block is periodic, so the channel has no edges;
//   2. takes the ideal compensating impulse response (inverse DFT of the
//      inverse channel), keeps N = 60% of the usual tap count plus two
//      (rounded to odd) taps around its centre, and rounds each tap's phase to
//      the nearest of the 30 roots: r[k] = round(angle(h[k-(N-1)/2]) / 12 deg)
//      mod 30. The mapping is written through the mapping port, as the
//      dispersion-estimation controller would;
//   3. streams L + 256 samples through the equalizer and fits one complex
//      gain between the symbol-spaced outputs and the transmitted symbols.
// It reports the SNR before and after equalization and the 16-QAM symbol
// errors. A scenario passes if equalization gains at least 8 dB and the
// equalized SNR is at least 12 dB. There is no noise or nonlinearity, so the
// SNR shows only the error of the root approximation and of the shortened
// filter.
module rue_cd_tb;
  import rue_pkg::*;
  import cd_sim_pkg::*;

  localparam int MT   = MAX_TAPS_DEFAULT;
  localparam int NRT  = NR_DEFAULT;
  localparam int L    = 4096;
  localparam int NSYM = L / 2;
  localparam int SPANS [4] = '{1, 2, 4, 8};

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

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (n_out < y_re.size()) begin
      y_re[n_out] = int'(out_sample.re);
      y_im[n_out] = int'(out_sample.im);
    end
    n_out++;
  end
  assign out_ready = 1'b1;

  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real sym_re[], sym_im[], h_re[], h_im[];
    int  q_re[], q_im[], idx[];
    real z, ph, snr_before, snr_after, s_tmp;
    int  nopt, ntaps, c, sym_err, e_tmp;
    map_entry_t e;

    in_valid = 0; in_sample = '0; map_wr_en = 0; map_wr_k = '0; map_wr_entry = '0;
    out_shift = '0; n_out = 0;
    y_re = new[L + MT];
    y_im = new[L + MT];
    idx  = new[NSYM];
    h_re = new[L];
    h_im = new[L];
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int sc = 0; sc < 4; sc++) begin
      z     = real'(SPANS[sc]) * SPAN_M;
      nopt  = cd_taps(z);
      ntaps = int'($floor(0.6 * real'(nopt) + 2.0));
      if (ntaps % 2 == 0) ntaps++;
      c = (ntaps - 1) / 2;

      make_signal(L, z, sym_re, sym_im, q_re, q_im);

      // ideal compensating impulse response, rounded to roots
      for (int i = 0; i < L; i++) begin
        h_re[i] = $cos(-cd_phase(i, L, z));
        h_im[i] = $sin(-cd_phase(i, L, z));
      end
      fft(h_re, h_im, 1);
      for (int k = 0; k < MT; k++) begin
        e = '0;
        if (k < ntaps) begin
          int m;
          m  = (k - c + L) % L;
          ph = $atan2(h_im[m], h_re[m]);
          if (ph < 0.0) ph += 2.0 * PI;
          e.used = 1;
          e.root = 5'(int'($floor(ph / (2.0 * PI / real'(NRT)) + 0.5)) % NRT);
        end
        @(negedge clk);
        map_wr_en = 1; map_wr_k = 8'(k); map_wr_entry = e;
      end
      @(negedge clk);
      map_wr_en = 0;
      // output gain is about sqrt(N); shift it back towards the input scale
      out_shift = 5'(int'($floor($ln($sqrt(real'(ntaps))) / $ln(2.0))));

      // SNR before equalization, at the best symbol-spaced delay
      snr_before = -100.0;
      for (int d = 0; d <= 2 * c; d += 2) begin
        for (int s = 0; s < NSYM; s++) idx[s] = (2 * s + d) % L;
        fit_snr(q_re, q_im, idx, sym_re, sym_im, s_tmp, e_tmp);
        if (s_tmp > snr_before) snr_before = s_tmp;
      end

      // stream L + MT samples of the periodic received signal
      n_out = 0;
      for (int i = 0; i < L + MT; i++) begin
        @(negedge clk);
        in_valid = 1;
        in_sample.re = 16'(q_re[i % L]);
        in_sample.im = 16'(q_im[i % L]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0;
      while (n_out < L + MT) @(negedge clk);

      // output n (n >= MT, window full) holds y[n] ~ x[n - c]; x[2s] is symbol s
      for (int s = 0; s < NSYM; s++) idx[s] = (2 * s + c < MT) ? 2 * s + c + L : 2 * s + c;
      fit_snr(y_re, y_im, idx, sym_re, sym_im, snr_after, sym_err);
      $display("%0d span(s), %0d km: N = %0d taps (usual count %0d), SNR %.1f dB -> %.1f dB, symbol errors %0d of %0d",
               SPANS[sc], SPANS[sc] * 80, ntaps, nopt, snr_before, snr_after, sym_err, NSYM);
      checks++;
      if (snr_after < 12.0 || snr_after - snr_before < 8.0) begin
        failures++;
        $display("FAIL equalization too weak for %0d span(s)", SPANS[sc]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
