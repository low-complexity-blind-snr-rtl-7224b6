// size_run -- testbench harness: one estimator of size M fed from the
// antenna domain through the behavioural DFT, with its own checker.
//
// Generates NVEC antenna-domain vectors (1..3 ULA paths with QPSK symbol and
// complex white noise; the first of every four vectors is noise only; SNR
// cycling through -10, 0, 10, 20 dB with the noise level chosen so that the
// strongest beam fits the 10-bit beamspace range), sends them back to back
// through fft_model into snr_estimator_top #(M), and compares every output
// with the reference model computed from the beamspace samples actually
// delivered. Checks the latency of 3*M + RHO_W + 4 clock edges from the
// first accepted beamspace sample. Raises `done` when all NVEC results have
// been checked; `checks` and `failures` accumulate.
module size_run
  import snr_pkg::*;
  import snr_ref_pkg::*;
#(
  parameter int unsigned M    = 16,
  parameter int          NVEC = 16
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int unsigned CW = $clog2(M + 1);
  localparam real PI = 3.14159265358979;

  logic a_valid = 0;
  logic signed [ANT_W-1:0] a_re = '0, a_im = '0;
  logic a_ready, b_valid, in_ready, out_valid, out_hit, out_clamped;
  bs_t  b_re, b_im;
  est_t out_est;
  logic [CW-1:0] out_mstar;

  fft_model #(.M(M)) u_fft (
    .clk, .rst_n, .in_valid(a_valid), .in_re(a_re), .in_im(a_im), .in_ready(a_ready),
    .out_valid(b_valid), .out_re(b_re), .out_im(b_im), .out_ready(in_ready)
  );
  snr_estimator_top #(.M(M)) dut (
    .clk, .rst_n, .in_valid(b_valid), .in_re(b_re), .in_im(b_im), .in_ready,
    .out_valid, .out_est, .out_hit, .out_mstar, .out_clamped
  );

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

  logic signed [ANT_W-1:0] yre [NVEC][M], yim [NVEC][M];

  task automatic make_vector(int v);
    int L;
    real snr, n0, px, sr, si, gr [3], gi [3], phi [3], hr [M], hi [M], e;
    snr = 10.0 ** ((-10.0 + 10.0 * real'((v / 4) % 4)) / 10.0);
    n0  = (0.7 + 0.3 * real'($urandom % 100) / 100.0) * 2.5 / (real'(M) * (1.0 + snr));
    px  = (v % 4 == 0) ? 0.0 : n0 * snr;
    L   = 1 + $urandom % 3;
    sr  = ($urandom % 2 != 0) ? 0.7071 : -0.7071;
    si  = ($urandom % 2 != 0) ? 0.7071 : -0.7071;
    for (int l = 0; l < L; l++) begin
      gr[l]  = gauss() * (l == 0 ? 1.0 : 0.3);
      gi[l]  = gauss() * (l == 0 ? 1.0 : 0.3);
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
      k  = (e > 0.0) ? $sqrt(px * real'(M) / e) : 0.0;
      xr = k * (hr[m] * sr - hi[m] * si);
      xi = k * (hr[m] * si + hi[m] * sr);
      yre[v][m] = q_ant(xr + $sqrt(n0 / 2.0) * gauss());
      yim[v][m] = q_ant(xi + $sqrt(n0 / 2.0) * gauss());
    end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int unsigned bs_pwr [$];
  int t_first [$];
  always @(posedge clk) if (rst_n && b_valid && in_ready) begin
    if (bs_pwr.size() % M == 0) t_first.push_back(cyc);
    bs_pwr.push_back(ref_sq(int'(b_re), int'(b_im)));
  end

  initial begin
    for (int v = 0; v < NVEC; v++) make_vector(v);
    wait (rst_n);
    @(negedge clk);
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

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL (M=%0d): %s", M, what);
    end
  endtask

  initial begin
    automatic ref_t r;
    automatic int unsigned p[$];
    automatic int n_hit = 0;
    done = 0; checks = 0; failures = 0;
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
      check(out_hit == r.hit && out_mstar == CW'(r.mstar) && out_clamped == r.clamped,
            $sformatf("v%0d hit/m*/clamp", v));
      if (out_hit) n_hit++;
    end
    $display("M = %0d: %0d vectors, %0d with a hit", M, NVEC, n_hit);
    done = 1;
  end
endmodule
