// cd_sim_pkg -- signal and fiber models shared by the dispersion testbenches.
//
// Provides a radix-2 FFT on real arrays, the quadratic phase of chromatic
// dispersion of standard single-mode fiber (D = 16.8 ps/nm/km, 1550 nm) at
// fs = 64 GS/s (32 GBd, 2 samples per symbol), the usual tap count of a
// time-domain dispersion filter, a generator of band-limited 16-QAM signals
// passed through the fiber, and a complex least-squares gain fit that returns
// the SNR of a symbol-spaced output against the transmitted symbols.
// Simulation only.
package cd_sim_pkg;

  localparam real PI     = 3.14159265358979;
  localparam real FS     = 64.0e9;
  localparam real DISP   = 16.8e-6;      // s/m^2
  localparam real LAMBDA = 1550.0e-9;
  localparam real C0     = 299792458.0;
  localparam real SPAN_M = 80.0e3;

  // In-place radix-2 FFT; inv = 1 gives the inverse, scaled by 1/n.
  task automatic fft(ref real re[], ref real im[], input bit inv);
    int n, j, m, half;
    real tr, ti, wr, wi, ang, ur, ui;
    n = re.size();
    j = 0;
    for (int i = 0; i < n - 1; i++) begin
      if (i < j) begin
        tr = re[i]; re[i] = re[j]; re[j] = tr;
        ti = im[i]; im[i] = im[j]; im[j] = ti;
      end
      m = n >> 1;
      while (m >= 1 && j >= m) begin j -= m; m >>= 1; end
      j += m;
    end
    half = 1;
    while (half < n) begin
      for (int k = 0; k < half; k++) begin
        ang = (inv ? 2.0 : -2.0) * PI * real'(k) / real'(2 * half);
        wr = $cos(ang);
        wi = $sin(ang);
        for (int b = k; b < n; b += 2 * half) begin
          ur = re[b + half] * wr - im[b + half] * wi;
          ui = re[b + half] * wi + im[b + half] * wr;
          re[b + half] = re[b] - ur;
          im[b + half] = im[b] - ui;
          re[b] = re[b] + ur;
          im[b] = im[b] + ui;
        end
      end
      half *= 2;
    end
    if (inv) for (int i = 0; i < n; i++) begin re[i] /= real'(n); im[i] /= real'(n); end
  endtask

  // Dispersion phase pi*D*lambda^2*z*f^2/c of FFT bin "bin" of an n-point block.
  function automatic real cd_phase(int bin, int n, real z);
    real f;
    f = real'((bin < n / 2) ? bin : bin - n) * FS / real'(n);
    return PI * DISP * LAMBDA * LAMBDA * z * f * f / C0;
  endfunction

  // Usual tap count 2*floor(D*lambda^2*z/(2*c*T^2)) + 1, T = 1/FS.
  function automatic int cd_taps(real z);
    return 2 * int'($floor(DISP * LAMBDA * LAMBDA * z * FS * FS / C0 / 2.0)) + 1;
  endfunction

  // Random 16-QAM symbols (levels -3, -1, 1, 3) on the even samples of an
  // n-sample block, band-limited to +-fs/4, dispersed by z metres of fiber,
  // scaled to an RMS of 4000 per component and rounded to 16 bits.
  task automatic make_signal(input int n, input real z, ref real sym_re[], ref real sym_im[],
                             ref int q_re[], ref int q_im[]);
    real a_re[], a_im[];
    real hr, hi, tr, rms, sc;
    int fb;
    a_re = new[n];
    a_im = new[n];
    sym_re = new[n / 2];
    sym_im = new[n / 2];
    q_re = new[n];
    q_im = new[n];
    for (int i = 0; i < n; i++) begin a_re[i] = 0.0; a_im[i] = 0.0; end
    for (int s = 0; s < n / 2; s++) begin
      sym_re[s] = real'(2 * int'($urandom_range(0, 3)) - 3);
      sym_im[s] = real'(2 * int'($urandom_range(0, 3)) - 3);
      a_re[2 * s] = sym_re[s];
      a_im[2 * s] = sym_im[s];
    end
    fft(a_re, a_im, 0);
    for (int i = 0; i < n; i++) begin
      fb = (i < n / 2) ? i : n - i;
      if (fb > n / 4) begin
        a_re[i] = 0.0; a_im[i] = 0.0;
      end else begin
        if (fb == n / 4) begin a_re[i] *= 0.5; a_im[i] *= 0.5; end
        hr = 2.0 * $cos(cd_phase(i, n, z));
        hi = 2.0 * $sin(cd_phase(i, n, z));
        tr      = a_re[i] * hr - a_im[i] * hi;
        a_im[i] = a_re[i] * hi + a_im[i] * hr;
        a_re[i] = tr;
      end
    end
    fft(a_re, a_im, 1);
    rms = 0.0;
    for (int i = 0; i < n; i++) rms += a_re[i] * a_re[i] + a_im[i] * a_im[i];
    rms = $sqrt(rms / real'(2 * n));
    sc = 4000.0 / rms;
    for (int i = 0; i < n; i++) begin
      q_re[i] = int'(a_re[i] * sc);
      q_im[i] = int'(a_im[i] * sc);
      if (q_re[i] > 32767) q_re[i] = 32767;
      if (q_re[i] < -32768) q_re[i] = -32768;
      if (q_im[i] > 32767) q_im[i] = 32767;
      if (q_im[i] < -32768) q_im[i] = -32768;
    end
  endtask

  // 16-QAM decision on one component.
  function automatic int slicer(real v);
    if (v < -2.0) return -3;
    if (v < 0.0) return -1;
    if (v < 2.0) return 1;
    return 3;
  endfunction

  // SNR (dB) of y[idx[s]] against symbol s after a complex least-squares
  // gain; also counts 16-QAM symbol errors after removing that gain.
  task automatic fit_snr(ref int y_re[], ref int y_im[], ref int idx[], ref real sym_re[],
                         ref real sym_im[], output real snr_db, output int errors);
    real num_r, num_i, den, gr, gi, g2, er, ei, ps, pe, dr, di;
    int n;
    num_r = 0.0; num_i = 0.0; den = 0.0;
    for (int s = 0; s < idx.size(); s++) begin
      n = idx[s];
      num_r += real'(y_re[n]) * sym_re[s] + real'(y_im[n]) * sym_im[s];
      num_i += real'(y_im[n]) * sym_re[s] - real'(y_re[n]) * sym_im[s];
      den   += sym_re[s] * sym_re[s] + sym_im[s] * sym_im[s];
    end
    gr = num_r / den;
    gi = num_i / den;
    g2 = gr * gr + gi * gi;
    ps = 0.0; pe = 0.0; errors = 0;
    for (int s = 0; s < idx.size(); s++) begin
      n = idx[s];
      er = real'(y_re[n]) - (gr * sym_re[s] - gi * sym_im[s]);
      ei = real'(y_im[n]) - (gr * sym_im[s] + gi * sym_re[s]);
      ps += g2 * (sym_re[s] * sym_re[s] + sym_im[s] * sym_im[s]);
      pe += er * er + ei * ei;
      if (g2 > 0.0) begin
        dr = (real'(y_re[n]) * gr + real'(y_im[n]) * gi) / g2;
        di = (real'(y_im[n]) * gr - real'(y_re[n]) * gi) / g2;
        if (slicer(dr) != int'(sym_re[s]) || slicer(di) != int'(sym_im[s])) errors++;
      end else begin
        errors++;
      end
    end
    if (pe <= 0.0) pe = 1e-30;
    if (ps <= 0.0) ps = 1e-30;
    snr_db = 10.0 * $log10(ps / pe);
  endtask

endpackage
