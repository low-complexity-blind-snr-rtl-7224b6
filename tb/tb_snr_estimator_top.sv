// tb_snr_estimator_top -- end-to-end testbench of snr_estimator_top.
//
// Drives beamspace vectors straight into the estimator (the FFT is outside
// the top) back to back, as fast as in_ready allows, and compares every
// output (N0^, S_M, Px^, rho^, hit, m*) with the reference model computed
// from the same samples. The vectors are random sparse beamspace vectors
// (complex Gaussian noise plus 0..M-1 strong beams) and directed cases.
// Every mechanism of the design is counted and must happen at least once:
// a hit in each of the three gamma intervals, the no-hit fallback (m* = M),
// the zero clamp of Px^, saturation of the cumulative sum, a zero noise
// estimate (SNR saturates to all ones) and input back-pressure (in_ready low
// while a vector is waiting). The clamp can only occur when the sum
// saturates and the hit comes late with a small gamma, so this test runs the
// top with gamma_3 = 1/4 (G3 = -2); everything else is at the defaults. The
// latency is checked: out_valid is set by the (3*M + RHO_W + 4)-th clock edge
// after the edge that accepted the first sample of the vector.
module tb_snr_estimator_top;
  import snr_pkg::*;
  import snr_ref_pkg::*;
  localparam int unsigned M  = 64;
  localparam int unsigned M1 = M / 4, M2 = 3 * M / 4;
  localparam int G1 = 4, G2 = 3, G3 = -2;
  localparam int unsigned CW = $clog2(M + 1);
  localparam int NVEC = 60;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  bs_t  in_re = '0, in_im = '0;
  logic in_ready, out_valid, out_hit, out_clamped;
  est_t out_est;
  logic [CW-1:0] out_mstar;
  int checks = 0, failures = 0;

  snr_estimator_top #(.M(M), .M1(M1), .M2(M2), .G1(G1), .G2(G2), .G3(G3)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * 3.14159265358979 * u2);
  endfunction

  function automatic bs_t sat(real v);
    int q;
    q = int'(v * 256.0);
    if (q > 511) q = 511;
    if (q < -512) q = -512;
    return bs_t'(q);
  endfunction

  // Vector generation
  bs_t vre [NVEC][M], vim [NVEC][M];
  ref_t expv [NVEC];
  int  mech_region [4];
  int  mech_clamp = 0, mech_sat = 0, mech_zero = 0, mech_bp = 0;

  task automatic make_vector(int idx);
    int kind, nstrong;
    real sigma, amp;
    int unsigned p[$];
    kind = idx % 8;
    sigma = 0.5 + 0.2 * real'($urandom % 100) / 100.0;   // per-component noise std
    if (kind == 4) sigma = 0.4 * sigma;  // many beams, high SNR
    if (kind == 5) sigma = 0.16;         // boundary inside the first interval
    case (kind)
      0: nstrong = 0;
      1, 2, 3: nstrong = 1 + $urandom % 4;
      4: nstrong = M / 2;
      5: nstrong = M - 6;
      default: nstrong = -1;        // directed
    endcase
    for (int i = 0; i < M; i++) begin
      if (kind == 6) begin          // all zero: fallback with N0^ = 0
        vre[idx][i] = '0;
        vim[idx][i] = '0;
      end else if (kind == 7) begin // saturating sum with a late hit: clamp
        vre[idx][i] = (i < M - 4) ? bs_t'(375) : bs_t'(511);
        vim[idx][i] = (i < M - 4) ? bs_t'(375) : bs_t'(511);
      end else begin
        amp = (i < nstrong) ? 1.3 + 0.6 * real'($urandom % 100) / 100.0 : 0.0;
        vre[idx][i] = sat(amp + sigma * gauss());
        vim[idx][i] = sat(sigma * gauss());
      end
    end
    for (int i = 0; i < M; i++) p.push_back(ref_sq(int'(vre[idx][i]), int'(vim[idx][i])));
    p.shuffle();   // order inside a vector must not matter ...
    expv[idx] = ref_estimate(p, M, M1, M2, G1, G2, G3);
    // ... so shuffle the samples that are sent as well
    for (int i = M - 1; i > 0; i--) begin
      int j;
      bs_t t;
      j = $urandom % (i + 1);
      t = vre[idx][i]; vre[idx][i] = vre[idx][j]; vre[idx][j] = t;
      t = vim[idx][i]; vim[idx][i] = vim[idx][j]; vim[idx][j] = t;
    end
  endtask

  // Sender
  int t_first [NVEC];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    for (int v = 0; v < NVEC; v++) make_vector(v);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < NVEC; v++) begin
      for (int i = 0; i < M; i++) begin
        in_valid = 1;
        in_re = vre[v][i];
        in_im = vim[v][i];
        while (!in_ready) begin
          if (i == 0) mech_bp++;
          @(negedge clk);
        end
        @(posedge clk);
        if (i == 0) t_first[v] = cyc;
        @(negedge clk);
      end
    end
    in_valid = 0;
  end

  // Checker
  initial begin
    ref_t r;
    wait (rst_n);
    for (int v = 0; v < NVEC; v++) begin
      @(posedge clk);
      while (!out_valid) @(posedge clk);
      r = expv[v];
      // out_valid is set by the (3*M + RHO_W + 4)-th edge after the accepting
      // edge; this loop sees it at the next edge.
      check(cyc - t_first[v] == 3 * M + RHO_W + 5,
            $sformatf("vector %0d latency %0d exp %0d", v, cyc - t_first[v], 3 * M + RHO_W + 5));
      check(out_est.n0 == n0_t'(r.n0), $sformatf("v%0d n0 %0d exp %0d", v, out_est.n0, r.n0));
      check(out_est.sm == sum_t'(r.sm), $sformatf("v%0d sm %0d exp %0d", v, out_est.sm, r.sm));
      check(out_est.px == px_t'(r.px), $sformatf("v%0d px %0d exp %0d", v, out_est.px, r.px));
      check(out_est.rho == rho_t'(r.rho), $sformatf("v%0d rho %0d exp %0d", v, out_est.rho, r.rho));
      check(out_hit == r.hit, $sformatf("v%0d hit %0d exp %0d", v, out_hit, r.hit));
      check(out_clamped == r.clamped, $sformatf("v%0d clamp flag", v));
      check(out_mstar == CW'(r.mstar), $sformatf("v%0d m* %0d exp %0d", v, out_mstar, r.mstar));
      mech_region[r.region]++;
      if (r.clamped) mech_clamp++;
      if (r.sm == 65535) mech_sat++;
      if (r.n0 == 0) mech_zero++;
    end
    $display("mechanisms: fallback %0d, hit in gamma_1 %0d, gamma_2 %0d, gamma_3 %0d, clamp %0d, sum saturated %0d, N0=0 %0d, back-pressure %0d",
             mech_region[0], mech_region[1], mech_region[2], mech_region[3],
             mech_clamp, mech_sat, mech_zero, mech_bp);
    for (int i = 0; i < 4; i++) check(mech_region[i] > 0, $sformatf("gamma interval / fallback %0d never happened", i));
    check(mech_clamp > 0, "clamp never happened");
    check(mech_sat > 0, "sum saturation never happened");
    check(mech_zero > 0, "zero noise estimate never happened");
    check(mech_bp > 0, "back-pressure never happened");
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
