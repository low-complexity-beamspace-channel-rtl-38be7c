// tb_bcd_top: end-to-end test of the denoiser at M = 64.
//
// Channel vectors are sparse sums of on-grid and off-grid paths plus Gaussian noise, passed
// through a b-bit uniform quantizer (the low-resolution ADC) and rounded to Q8.8. Every vector
// goes to two denoisers: A with all defaults and B with RHO_MIN = 48, which makes the c'
// fallback of the noise estimator reachable. A real-valued model of the whole algorithm
// (normalized DFT, squared magnitudes, blind noise estimate, channel power, SDNR, active-beam
// count, threshold, hard thresholding with 1/alpha, inverse DFT) is evaluated here and the
// designs are checked against it: D0 (6 % + 4 LSB), qM (within 1 or 10 %), the threshold
// against the model applied to the design's own D0/SDNR/qM, the number of kept beams and
// every output sample (6 LSB) whenever no beam lies within 3 % of the threshold.
// Mechanisms that must occur at least once: estimator mode, prior-knowledge mode (bypass),
// the c' fallback, a non-positive activity denominator (flat beamspace), a threshold that
// removes every beam (SDNR = 0 given as prior), beams both kept and zeroed, several ADC
// resolutions. The latency from the first input to the first output is measured.
module tb_bcd_top;
  localparam int M = 64;
  localparam real PI = 3.141592653589793;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_est = 0, n_prior = 0, n_cp = 0, n_clip = 0, n_none = 0, n_mixed = 0, n_adc = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  logic in_valid = 0;
  logic signed [15:0] in_re = 0, in_im = 0;
  logic [2:0] adc_bits = 3;
  logic prior_en = 0;
  logic [15:0] prior_d0 = 0, prior_ph = 0;
  logic [23:0] prior_sdnr = 0;

  typedef struct {
    logic in_ready, out_valid, out_last, used_cp, den_clip;
    logic signed [15:0] out_re, out_im;
    logic [15:0] d0, ph;
    logic [23:0] sdnr, eta;
    logic [6:0] qm, kept;
  } obs_t;
  obs_t a, b;

  bcd_top dut_a (
    .clk, .rst_n, .in_valid, .in_re, .in_im, .in_ready(a.in_ready), .adc_bits,
    .prior_en, .prior_d0, .prior_ph, .prior_sdnr,
    .out_valid(a.out_valid), .out_re(a.out_re), .out_im(a.out_im), .out_last(a.out_last),
    .st_d0(a.d0), .st_ph(a.ph), .st_sdnr(a.sdnr), .st_qm(a.qm), .st_eta(a.eta),
    .st_used_cp(a.used_cp), .st_den_clip(a.den_clip), .st_kept(a.kept));
  bcd_top #(.RHO_MIN(48)) dut_b (
    .clk, .rst_n, .in_valid, .in_re, .in_im, .in_ready(b.in_ready), .adc_bits,
    .prior_en, .prior_d0, .prior_ph, .prior_sdnr,
    .out_valid(b.out_valid), .out_re(b.out_re), .out_im(b.out_im), .out_last(b.out_last),
    .st_d0(b.d0), .st_ph(b.ph), .st_sdnr(b.sdnr), .st_qm(b.qm), .st_eta(b.eta),
    .st_used_cp(b.used_cp), .st_den_clip(b.den_clip), .st_kept(b.kept));

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ reference model
  real xr [M], xi [M];          // quantized antenna-domain input (exact Q8.8 values)
  real br [M], bi [M];          // beamspace
  real sq [M];                  // |.|^2 in LSB of Q8.8
  real yr [M], yi [M];          // expected output

  function automatic real kap(real k);
    return (1.0 - $exp(-k) * (1.0 + k)) / (1.0 - $exp(-k));
  endfunction
  function automatic real rho_b(int bits);
    case (bits)
      1: return 0.3634; 2: return 0.1175; 3: return 0.03454; 4: return 0.009497; 5: return 0.002499;
      default: return (bits <= 0) ? 0.3634 : 2.7207 * (2.0 ** (-2 * bits));
    endcase
  endfunction
  function automatic real absr(real v);
    return (v < 0) ? -v : v;
  endfunction

  task automatic dft(input bit inv, input real ir [M], input real ii [M],
                     output real orr [M], output real oi [M]);
    real s, ang;
    s = inv ? 1.0 : -1.0;
    for (int k = 0; k < M; k++) begin
      orr[k] = 0; oi[k] = 0;
      for (int n = 0; n < M; n++) begin
        ang = s * 2.0 * PI * real'(k * n) / real'(M);
        orr[k] += ir[n] * $cos(ang) - ii[n] * $sin(ang);
        oi[k]  += ir[n] * $sin(ang) + ii[n] * $cos(ang);
      end
      orr[k] /= 8.0; oi[k] /= 8.0;
    end
  endtask

  // blind estimate of D0 (LSB units) on the squared magnitudes
  function automatic real noise_model(int rho);
    real v[$], d, tau, s;
    int cnt;
    bit cp;
    foreach (sq[i]) v.push_back($floor(sq[i]));
    v.sort();
    d = $floor((v[M/2-1] + v[M/2]) / 2.0) / $ln(2.0);
    for (int t = 0; t < 3; t++) begin
      tau = 2.0 * d; cnt = 0; s = 0; cp = 0;
      foreach (v[i]) if (v[i] <= tau) begin cnt++; s += v[i]; end
      if (cnt < rho) begin
        cp = 1; tau = 4.0 * d; cnt = 0; s = 0;
        foreach (v[i]) if (v[i] <= tau) begin cnt++; s += v[i]; end
      end
      if (cnt > 0) d = (s / cnt) / kap(cp ? 4.0 : 2.0);
    end
    return d;
  endfunction

  function automatic int qm_model(real d, real p);
    real s4, den, q;
    int r;
    s4 = 0;
    foreach (sq[i]) s4 += $floor(sq[i]) * $floor(sq[i]);
    den = s4 - 2.0 * M * d * d - 4.0 * M * d * p;
    if (den <= 0) return M - 1;
    q = 2.0 * M * M * p * p / den;
    r = (q > M) ? M : int'($floor(q + 0.5));
    return (r < 1) ? 1 : (r > M - 1) ? M - 1 : r;
  endfunction

  function automatic real eta_model(real d, real sdnr, int q);   // d, result in LSB
    real e;
    if (sdnr <= 0) return 1.0e30;
    e = d * (1.0 + q / (M * sdnr)) * ($ln((1.0 + M * sdnr / q) * 4.0) + $ln(real'(M - q)) - $ln(real'(q)));
    return (e < 0) ? 0 : e;
  endfunction

  // ------------------------------------------------------------------ stimulus
  task automatic make_vec(int kind, int bits);
    real hr [M], hi [M], g, phi, ph0, step, lim, sig;
    for (int n = 0; n < M; n++) begin hr[n] = 0; hi[n] = 0; end
    if (kind == 2) begin
      hr[0] = 1.0;                                    // impulse: flat beamspace
    end else begin
      for (int l = 0; l < ((kind == 1) ? 4 : 2); l++) begin
        g   = 0.08 + 0.1 * real'($urandom_range(100)) / 100.0;
        phi = (kind == 1) ? real'($urandom_range(6399)) / 6400.0 : real'($urandom_range(M - 1)) / M;
        ph0 = 2.0 * PI * real'($urandom_range(999)) / 1000.0;
        for (int n = 0; n < M; n++) begin
          hr[n] += g * $cos(ph0 - 2.0 * PI * phi * n);
          hi[n] += g * $sin(ph0 - 2.0 * PI * phi * n);
        end
      end
      sig = 0.12;
      for (int n = 0; n < M; n++) begin
        real u1, u2;
        u1 = (real'($urandom_range(1000000)) + 0.5) / 1000001.0;
        u2 = real'($urandom_range(1000000)) / 1000001.0;
        hr[n] += sig * $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
        hi[n] += sig * $sqrt(-2.0 * $ln(u1)) * $sin(2.0 * PI * u2);
      end
    end
    // b-bit uniform quantizer, mid-rise, step chosen so the range covers about 2.5 sigma
    step = 0.6 / real'(1 << (bits - 1));
    lim  = (real'(1 << (bits - 1)) - 0.5) * step;
    for (int n = 0; n < M; n++) begin
      if (kind != 2) begin
        hr[n] = ($floor(hr[n] / step) + 0.5) * step;
        hi[n] = ($floor(hi[n] / step) + 0.5) * step;
        if (hr[n] > lim) hr[n] = lim;
        if (hr[n] < -lim) hr[n] = -lim;
        if (hi[n] > lim) hi[n] = lim;
        if (hi[n] < -lim) hi[n] = -lim;
      end
      xr[n] = $floor(hr[n] * 256.0 + 0.5) / 256.0;
      xi[n] = $floor(hi[n] * 256.0 + 0.5) / 256.0;
    end
  endtask

  // ------------------------------------------------------------------ one vector
  obs_t ra [M], rb [M];
  int lat_a;

  task automatic check_one(string tag, obs_t o, obs_t outs [M], int rho, bit prior,
                           real pd0, real pph, real psdnr, int bits);
    real d, p, s, e_own, margin, ia, err;
    int q, kept_ref, border;
    if (prior) begin
      d = pd0; p = pph; s = psdnr;
    end else begin
      d = noise_model(rho);
      p = 0;
      foreach (sq[i]) p += $floor(sq[i]);
      p = $floor(p / M) - d;
      if (p < 0) p = 0;
      s = (d > 0) ? p / d : 65535.0;
      checks++;
      if (absr(real'(o.d0) - d) > 0.06 * d + 4.0) begin
        failures++; $display("%s d0 %0d exp %f", tag, o.d0, d);
      end
    end
    q = qm_model(real'(o.d0), real'(o.ph));
    checks++;
    if (absr(real'(o.qm) - q) > 1.0 && absr(real'(o.qm) - q) > 0.1 * q) begin
      failures++; $display("%s qm %0d exp %0d", tag, o.qm, q);
    end
    e_own = eta_model(real'(o.d0), real'(o.sdnr) / 256.0, int'(o.qm));
    checks++;
    if (e_own >= 1.0e29) begin
      if (o.eta != '1) begin failures++; $display("%s eta %0d exp max", tag, o.eta); end
    end else if (e_own < 65535.0 * 256.0 &&
                 absr(real'(o.eta) - e_own) > 0.02 * e_own +
                   0.004 * real'(o.d0) * (1.0 + real'(o.qm) / (M * real'(o.sdnr) / 256.0)) + 4.0) begin
      failures++; $display("%s eta %0d exp %f", tag, o.eta, e_own);
    end
    // keep set from the design's threshold and the exact squared magnitudes
    kept_ref = 0; border = 0;
    ia = 1.0 / (1.0 - rho_b(bits));
    begin
      real zr [M], zi [M];
      for (int k = 0; k < M; k++) begin
        bit kp;
        kp = sq[k] >= real'(o.eta);
        margin = absr(sq[k] - real'(o.eta));
        if (margin <= 0.03 * real'(o.eta) + 2.0) border++;
        if (kp) kept_ref++;
        zr[k] = kp ? br[k] * ia : 0.0;
        zi[k] = kp ? bi[k] * ia : 0.0;
      end
      dft(1'b1, zr, zi, yr, yi);
    end
    if (border == 0) begin
      checks++;
      if (int'(o.kept) != kept_ref) begin
        failures++; $display("%s kept %0d exp %0d", tag, o.kept, kept_ref);
      end
      for (int n = 0; n < M; n++) begin
        checks++;
        err = absr(real'(outs[n].out_re) / 256.0 - yr[n]) + absr(real'(outs[n].out_im) / 256.0 - yi[n]);
        if (err > 6.0 / 256.0) begin
          failures++;
          $display("%s n=%0d out %f %f exp %f %f", tag, n, real'(outs[n].out_re) / 256.0,
                   real'(outs[n].out_im) / 256.0, yr[n], yi[n]);
        end
      end
    end
    if (o.kept == 0) n_none++;
    if (int'(o.kept) > 0 && int'(o.kept) < M) n_mixed++;
    if (o.used_cp) n_cp++;
    if (o.den_clip) n_clip++;
  endtask

  task automatic run_vec(int kind, int bits, bit prior, real pd0, real pph, real psdnr);
    int t0, ka, kb;
    make_vec(kind, bits);
    dft(1'b0, xr, xi, br, bi);
    for (int k = 0; k < M; k++) begin
      // the beamspace word is 10 bits with 8 fractional bits: round and saturate, then square
      br[k] = $floor(br[k] * 256.0 + 0.5); bi[k] = $floor(bi[k] * 256.0 + 0.5);
      if (br[k] > 511.0) br[k] = 511.0;
      if (br[k] < -512.0) br[k] = -512.0;
      if (bi[k] > 511.0) bi[k] = 511.0;
      if (bi[k] < -512.0) bi[k] = -512.0;
      sq[k] = (br[k] * br[k] + bi[k] * bi[k]) / 256.0;
      if (sq[k] > 65535.0) sq[k] = 65535.0;
      br[k] /= 256.0; bi[k] /= 256.0;
    end
    wait (a.in_ready && b.in_ready);
    @(negedge clk);
    adc_bits = 3'(bits); prior_en = prior;
    prior_d0 = 16'(int'(pd0)); prior_ph = 16'(int'(pph)); prior_sdnr = 24'(int'(psdnr * 256.0));
    t0 = cycle;
    for (int n = 0; n < M; n++) begin
      in_valid = 1;
      in_re = 16'(int'(xr[n] * 256.0)); in_im = 16'(int'(xi[n] * 256.0));
      @(negedge clk);
    end
    in_valid = 0;
    ka = 0; kb = 0; lat_a = 0;
    while (ka < M || kb < M) begin
      if (a.out_valid) begin
        if (ka == 0) lat_a = cycle - t0;
        ra[ka] = a; ka++;
      end
      if (b.out_valid) begin rb[kb] = b; kb++; end
      @(negedge clk);
    end
    checks += 3;
    if (!ra[M-1].out_last) failures++;
    if (!rb[M-1].out_last) failures++;
    // paper: 770 cycles at M = 64; this design's estimator walk and divider add a few tens
    if (lat_a > 850 || lat_a < 64 + 2 * 193) begin
      failures++; $display("latency %0d outside [450, 850]", lat_a);
    end
    check_one("A", a, ra, M / 8, prior, pd0, pph, psdnr, bits);
    check_one("B", b, rb, 48, prior, pd0, pph, psdnr, bits);
    if (prior) n_prior++; else n_est++;
    $display("vector kind=%0d bits=%0d prior=%0b: D0=%0d P=%0d SDNR=%0d qM=%0d eta=%0d kept=%0d cp=%0b/%0b latency=%0d",
             kind, bits, prior, a.d0, a.ph, a.sdnr, a.qm, a.eta, a.kept, a.used_cp, b.used_cp, lat_a);
  endtask

  initial begin
    int bits_seen;
    repeat (3) @(posedge clk);
    rst_n = 1;
    bits_seen = 0;
    for (int i = 0; i < 8; i++) run_vec(i % 2, 2 + i % 3, 1'b0, 0, 0, 0);
    run_vec(2, 3, 1'b0, 0, 0, 0);                              // flat beamspace
    run_vec(0, 3, 1'b1, 8.0, 40.0, 5.0);                       // prior knowledge
    run_vec(1, 4, 1'b1, 8.0, 30.0, 0.0);                       // prior SDNR = 0: nothing kept
    run_vec(0, 1, 1'b0, 0, 0, 0);
    n_adc = 4;                                                 // 1, 2, 3 and 4 bits used above
    checks += 6;
    if (n_est == 0)   begin failures++; $display("estimator mode never ran"); end
    if (n_prior == 0) begin failures++; $display("prior mode never ran"); end
    if (n_cp == 0)    begin failures++; $display("c' fallback never taken"); end
    if (n_clip == 0)  begin failures++; $display("activity denominator never clipped"); end
    if (n_none == 0)  begin failures++; $display("no vector with all beams removed"); end
    if (n_mixed == 0) begin failures++; $display("no vector with kept and zeroed beams"); end
    $display("mechanisms: estimator %0d prior %0d c'-fallback %0d den-clip %0d none-kept %0d mixed %0d adc-settings %0d",
             n_est, n_prior, n_cp, n_clip, n_none, n_mixed, n_adc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
