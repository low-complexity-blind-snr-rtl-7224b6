// tb_separating_unit -- self-checking testbench of separating_unit.
// Streams sorted vectors into the unit and compares N0^, S_M, the hit flag
// and m* with the reference model (snr_ref_pkg). Vectors are drawn so that
// every path happens: noise only (often no hit: fallback m* = M), sparse
// strong components (hits in the third gamma interval), a quarter or half of
// strong components (hits in the first and second intervals), zeros (hit at
// m = 1 with Delta = 0 and S = 0) and large powers that saturate the sum.
// It also checks the latency: out_valid exactly 3 clocks after the clock
// carrying in_last. Runs with M = 16 and the default interval split.
module tb_separating_unit;
  import snr_pkg::*;
  import snr_ref_pkg::*;
  localparam int unsigned M = 16;
  localparam int unsigned M1 = M / 4, M2 = 3 * M / 4;
  localparam int G1 = 4, G2 = 3, G3 = 2;
  localparam int unsigned CW = $clog2(M + 1);
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  pwr_t in_pwr = '0;
  logic out_valid, out_hit;
  n0_t out_n0;
  sum_t out_sm;
  logic [CW-1:0] out_mstar;
  int checks = 0, failures = 0;
  int region_seen [4];

  separating_unit #(.M(M), .M1(M1), .M2(M2), .G1(G1), .G2(G2), .G3(G3)) dut (.*);
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

  function automatic int unsigned noise(int unsigned scale);
    // exponential-like power: -scale * ln(u)
    real u;
    u = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    return int'(-real'(scale) * $ln(u));
  endfunction

  task automatic run_vector(int kind);
    int unsigned v[$];
    ref_t r;
    int n;
    int unsigned nstrong;
    nstrong = (kind == 1) ? 1 + $urandom % 3 : (kind == 2) ? M / 2 : (kind == 3) ? M - 2 : 0;
    for (int i = 0; i < M; i++) begin
      int unsigned p;
      if (kind == 4) p = (i < 3) ? 0 : 50 + $urandom % 50;
      else if (kind == 5) p = 6000 + $urandom % 2000;
      else if (i < nstrong) p = noise(40) + 800 + $urandom % 3000;
      else p = noise(40);
      if (p > 65535) p = 65535;
      v.push_back(p);
    end
    v.sort();
    r = ref_estimate(v, M, M1, M2, G1, G2, G3);
    region_seen[r.region]++;
    for (int i = 0; i < M; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_first = (i == 0);
      in_last  = (i == M - 1);
      in_pwr   = pwr_t'(v[i]);
    end
    @(negedge clk);
    in_valid = 0; in_first = 0; in_last = 0;
    n = 1;
    while (!out_valid && n < 20) begin
      @(negedge clk);
      n++;
    end
    check(n == 3, $sformatf("latency %0d exp 3", n));
    check(out_n0 == n0_t'(r.n0), $sformatf("n0 %0d exp %0d (kind %0d)", out_n0, r.n0, kind));
    check(out_sm == sum_t'(r.sm), $sformatf("sm %0d exp %0d", out_sm, r.sm));
    check(out_hit == r.hit, $sformatf("hit %0d exp %0d", out_hit, r.hit));
    check(out_mstar == CW'(r.mstar), $sformatf("m* %0d exp %0d", out_mstar, r.mstar));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 300; k++) run_vector(k % 6);
    $display("regions hit: none %0d, 1: %0d, 2: %0d, 3: %0d",
             region_seen[0], region_seen[1], region_seen[2], region_seen[3]);
    for (int i = 0; i < 4; i++) check(region_seen[i] > 0, $sformatf("region %0d exercised", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
