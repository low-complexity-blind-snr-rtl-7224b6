// tb_noise_power_estimator -- self-checking testbench of
// noise_power_estimator (sorting unit + separating unit).
// Feeds unsorted power vectors (noise only, sparse strong components, many
// strong components, zeros) with random idle clocks, waits for in_ready
// between vectors, and compares N0^, S_M, the hit flag and m* with the
// reference model. Checks the latency: out_valid is set by the 3*M-th clock
// edge after the edge that accepted the first element, when the elements come
// back to back.
module tb_noise_power_estimator;
  import snr_pkg::*;
  import snr_ref_pkg::*;
  localparam int unsigned M = 32;
  localparam int unsigned CW = $clog2(M + 1);
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  pwr_t in_pwr = '0;
  logic in_ready, out_valid, out_hit;
  n0_t out_n0;
  sum_t out_sm;
  logic [CW-1:0] out_mstar;
  int checks = 0, failures = 0;
  int region_seen [4];

  noise_power_estimator #(.M(M)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
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

  function automatic int unsigned noise(int unsigned scale);
    real u;
    u = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    return int'(-real'(scale) * $ln(u));
  endfunction

  task automatic run_vector(int kind, bit gaps);
    int unsigned v[$];
    ref_t r;
    int n;
    bit had_gap;
    int unsigned nstrong;
    nstrong = (kind == 1) ? 1 + $urandom % 3 : (kind == 2) ? M / 2 : (kind == 3) ? M - 3 : 0;
    for (int i = 0; i < M; i++) begin
      int unsigned p;
      if (kind == 4) p = ($urandom % 4 == 0) ? 0 : 30 + $urandom % 30;
      else if (i < nstrong) p = noise(30) + 600 + $urandom % 1400;
      else p = noise(30);
      if (p > 2040) p = 2040;
      v.push_back(p);
    end
    v.shuffle();
    r = ref_estimate(v, M, M / 4, 3 * M / 4, 4, 3, 2);
    region_seen[r.region]++;
    while (!in_ready) @(negedge clk);
    had_gap = 0;
    for (int i = 0; i < M; i++) begin
      while (gaps && ($urandom % 4 == 0)) begin
        in_valid = 0;
        had_gap = 1;
        @(negedge clk);
      end
      in_valid = 1;
      in_pwr   = pwr_t'(v[i]);
      @(negedge clk);
    end
    in_valid = 0;
    n = M;     // clock edges since the one that accepted the first element, plus one
    while (!out_valid && n < 10 * M) begin
      @(negedge clk);
      n++;
    end
    if (!had_gap) check(n - 1 == 3 * M, $sformatf("latency %0d exp %0d", n - 1, 3 * M));
    check(out_n0 == n0_t'(r.n0), $sformatf("n0 %0d exp %0d (kind %0d)", out_n0, r.n0, kind));
    check(out_sm == sum_t'(r.sm), $sformatf("sm %0d exp %0d", out_sm, r.sm));
    check(out_hit == r.hit, $sformatf("hit %0d exp %0d", out_hit, r.hit));
    check(out_mstar == CW'(r.mstar), $sformatf("m* %0d exp %0d", out_mstar, r.mstar));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 200; k++) run_vector(k % 5, k % 3 == 2);
    $display("regions hit: none %0d, 1: %0d, 2: %0d, 3: %0d",
             region_seen[0], region_seen[1], region_seen[2], region_seen[3]);
    for (int i = 0; i < 4; i++) check(region_seen[i] > 0, $sformatf("region %0d exercised", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
