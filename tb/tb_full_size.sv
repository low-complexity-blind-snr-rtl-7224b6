// tb_full_size -- the estimator at its default size (M = 64 antennas, all
// parameters at their defaults) fed from the antenna domain.
//
// Each received vector is y = h*s + n for an M-element half-wavelength ULA:
// h is a sum of L = 1..3 paths g_l * a(phi_l) with a(phi) =
// [1, e^{-j pi phi}, ..., e^{-j (M-1) pi phi}], s a unit-power QPSK symbol and
// n complex white Gaussian noise of power N0 per antenna. The behavioural
// FFT (fft_model, unitary DFT) maps y to beamspace and streams it into
// snr_estimator_top. SNRs of -10, 0, 10 and 20 dB are swept; the first vector
// of each SNR carries noise only. The noise power is set per SNR so that the
// strongest beam stays inside the +-2 range of the 10-bit beamspace format,
// so at high SNR the noise is only a few LSBs and the estimates are limited
// by quantisation.
// Checks: every output equals the reference model computed from the
// beamspace samples the FFT model sent; the latency from the first
// accepted beamspace sample to out_valid is 3*M + RHO_W + 4 clock edges. It
// also prints, per SNR, the mean of N0^, Px^ and rho^ against the true
// values, for information only (these are statistics, not checks).
module tb_full_size;
  import snr_pkg::*;
  import snr_ref_pkg::*;
  localparam int unsigned M = 64;          // must equal the top's default
  localparam int unsigned CW = $clog2(M + 1);
  localparam int NSNR = 4;
  localparam int PER  = 12;
  localparam int NVEC = NSNR * PER;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  logic a_valid = 0;
  logic signed [ANT_W-1:0] a_re = '0, a_im = '0;
  logic a_ready;
  logic b_valid;
  bs_t  b_re, b_im;
  logic in_ready, out_valid, out_hit, out_clamped;
  est_t out_est;
  logic [CW-1:0] out_mstar;
  int checks = 0, failures = 0;

  fft_model #(.M(M)) u_fft (
    .clk, .rst_n, .in_valid(a_valid), .in_re(a_re), .in_im(a_im), .in_ready(a_ready),
    .out_valid(b_valid), .out_re(b_re), .out_im(b_im), .out_ready(in_ready)
  );
  snr_estimator_top dut (
    .clk, .rst_n, .in_valid(b_valid), .in_re(b_re), .in_im(b_im), .in_ready,
    .out_valid, .out_est, .out_hit, .out_mstar, .out_clamped
  );
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  function automatic logic signed [ANT_W-1:0] q_ant(real v);
    int q;
    q = int'(v * 256.0);
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return (ANT_W)'(q);
  endfunction

  // Antenna-domain vectors
  logic signed [ANT_W-1:0] yre [NVEC][M], yim [NVEC][M];
  real snr_db [NSNR] = '{-10.0, 0.0, 10.0, 20.0};
  real n0_true [NVEC];
  task automatic make_vector(int v);
    int L;
    real n0, px, sr, si, gr [3], gi [3], phi [3], hr [M], hi [M], e;
    // Noise level: as large as the 10-bit beamspace format allows, i.e. the
    // expected beamspace peak M * (Px + N0) stays near 2.5.
    n0 = (0.7 + 0.3 * real'($urandom % 100) / 100.0) *
         2.5 / (real'(M) * (1.0 + 10.0 ** (snr_db[v / PER] / 10.0)));
    n0_true[v] = n0;
    px = (v % PER == 0) ? 0.0 : n0 * 10.0 ** (snr_db[v / PER] / 10.0);
    L  = 1 + $urandom % 3;
    sr = ($urandom % 2 != 0) ? 0.7071 : -0.7071;
    si = ($urandom % 2 != 0) ? 0.7071 : -0.7071;
    for (int l = 0; l < L; l++) begin
      gr[l] = gauss() * (l == 0 ? 1.0 : 0.3);
      gi[l] = gauss() * (l == 0 ? 1.0 : 0.3);
      phi[l] = 2.0 * real'($urandom % 10000) / 10000.0 - 1.0;
    end
    e = 0.0;
    for (int m = 0; m < M; m++) begin
      hr[m] = 0.0; hi[m] = 0.0;
      for (int l = 0; l < L; l++) begin
        real ph;
        ph = -PI * real'(m) * phi[l];
        hr[m] += gr[l] * $cos(ph) - gi[l] * $sin(ph);
        hi[m] += gr[l] * $sin(ph) + gi[l] * $cos(ph);
      end
      e += hr[m] * hr[m] + hi[m] * hi[m];
    end
    for (int m = 0; m < M; m++) begin
      real xr, xi, k;
      k  = (e > 0.0) ? $sqrt(px * real'(M) / e) : 0.0;   // ||x||^2 = M * Px
      xr = k * (hr[m] * sr - hi[m] * si);
      xi = k * (hr[m] * si + hi[m] * sr);
      yre[v][m] = q_ant(xr + $sqrt(n0 / 2.0) * gauss());
      yim[v][m] = q_ant(xi + $sqrt(n0 / 2.0) * gauss());
    end
  endtask

  // Cycle counter and capture of what the FFT model delivers
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int unsigned bs_pwr [$];
  int t_first [$];
  always @(posedge clk) if (rst_n && b_valid && in_ready) begin
    if (bs_pwr.size() % M == 0) t_first.push_back(cyc);
    bs_pwr.push_back(ref_sq(int'(b_re), int'(b_im)));
  end

  // Antenna-domain sender
  initial begin
    for (int v = 0; v < NVEC; v++) make_vector(v);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < NVEC; v++)
      for (int m = 0; m < M; m++) begin
        a_valid = 1;
        a_re = yre[v][m];
        a_im = yim[v][m];
        while (!a_ready) @(negedge clk);
        @(negedge clk);
      end
    a_valid = 0;
  end

  // Checker
  initial begin
    automatic ref_t r;
    automatic int unsigned p[$];
    automatic real sum_n0 [NSNR], sum_px [NSNR], sum_rho [NSNR], sum_n0t [NSNR];
    automatic int  n_hit = 0;
    for (int i = 0; i < NSNR; i++) begin
      sum_n0[i] = 0; sum_px[i] = 0; sum_rho[i] = 0; sum_n0t[i] = 0;
    end
    wait (rst_n);
    for (int v = 0; v < NVEC; v++) begin
      @(posedge clk);
      while (!out_valid) @(posedge clk);
      p = {};
      for (int i = 0; i < M; i++) p.push_back(bs_pwr[v*M + i]);
      r = ref_estimate(p, M, M / 4, 3 * M / 4, 4, 3, 2);
      check(cyc - t_first[v] == 3 * M + RHO_W + 5,
            $sformatf("vector %0d latency %0d", v, cyc - t_first[v] - 1));
      check(out_est.n0 == n0_t'(r.n0), $sformatf("v%0d n0 %0d exp %0d", v, out_est.n0, r.n0));
      check(out_est.sm == sum_t'(r.sm), $sformatf("v%0d sm %0d exp %0d", v, out_est.sm, r.sm));
      check(out_est.px == px_t'(r.px), $sformatf("v%0d px %0d exp %0d", v, out_est.px, r.px));
      check(out_est.rho == rho_t'(r.rho), $sformatf("v%0d rho %0d exp %0d", v, out_est.rho, r.rho));
      check(out_hit == r.hit && out_mstar == CW'(r.mstar), $sformatf("v%0d hit/m*", v));
      if (out_hit) n_hit++;
      if (v % PER != 0) begin
        sum_n0[v / PER]  += real'(out_est.n0) / 256.0 / n0_true[v];
        sum_px[v / PER]  += real'(out_est.px) / 256.0 / n0_true[v];
        sum_rho[v / PER] += real'(out_est.rho) / 256.0;
      end
    end
    for (int i = 0; i < NSNR; i++)
      $display("SNR %5.1f dB: mean N0^/N0 %5.3f  mean Px^/N0 %8.3f (true %8.3f)  mean rho^ %8.3f",
               snr_db[i], sum_n0[i] / (PER - 1), sum_px[i] / (PER - 1),
               10.0 ** (snr_db[i] / 10.0), sum_rho[i] / (PER - 1));
    $display("vectors with a hit: %0d of %0d", n_hit, NVEC);
    check(n_hit > 0 && n_hit < NVEC, "both hit and fallback occurred");
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
