// separating_unit -- finds the noise/signal boundary m* in a sorted power
// vector and returns the noise power estimate N0^ = S_m* / m* and the total
// power S_M.
//
// The sorted powers p_1 <= p_2 <= ... <= p_M arrive one per clock (smallest
// first, marked by in_first/in_last). The unit keeps the previous sample and
// the cumulative sum S_{m-1}. When p_{m+1} arrives it forms
//   S_m     = S_{m-1} + p_m                (saturating, SUM_W bits)
//   Delta_m = p_{m+1} - p_m                (finite difference)
// and tests the hit rule  m * Delta_m >= gamma(m) * S_m  with one multiplier
// for m * Delta_m and a shift for gamma = 2^G, G in {G1, G2, G3} for
// m in [1, M1], (M1, M2], (M2, M-1]. A negative exponent is applied as a left
// shift of the other side, which is exact. A running sum of zero never hits:
// with 8 fractional bits the smallest powers often truncate to 0, and then
// 0 >= 0 would end the search at m = 1 with N0^ = 0 (in exact arithmetic the
// sum is never zero). The first index that hits is m*;
// S_m* is recorded. Without a hit, m* = M and S_m* = S_M. N0^ = S_m* * (1/m*)
// uses a table of 1/m (RECIP_F fractional bits, rounded to nearest, built at
// elaboration from round(2^RECIP_F / m)) and a multiplier, and is truncated
// to FRAC fractional bits.
//
// Follows the architecture: finite difference against the registered
// previous sample, running sum, shift for gamma, comparator, S_m* selection,
// 1/m LUT and multiplier. This design's own choices: the first hit is kept
// (the text declares the hit at the first index satisfying the rule; the
// listed algorithm overwrites m* at every hit), the defaults of G1..G3 and
// M1, M2 (not given numerically), the zero-sum guard, the saturating sum, the
// table precision and the rounding.
//
// Timing: the estimates (out_valid, one clock) appear 2 clocks after the
// clock that carried in_last. A new vector may start on the clock after
// in_last.
module separating_unit
  import snr_pkg::*;
#(
  parameter int unsigned M  = 64,      // vector length
  parameter int unsigned M1 = M / 4,   // end of the gamma_1 interval
  parameter int unsigned M2 = 3 * M / 4, // end of the gamma_2 interval
  parameter int          G1 = 4,       // gamma_1 = 2^G1
  parameter int          G2 = 3,       // gamma_2 = 2^G2
  parameter int          G3 = 2        // gamma_3 = 2^G3
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic                   in_first,
  input  logic                   in_last,
  input  pwr_t                   in_pwr,
  output logic                   out_valid,
  output n0_t                    out_n0,     // N0^
  output sum_t                   out_sm,     // S_M
  output logic                   out_hit,    // a hit was found
  output logic [$clog2(M+1)-1:0] out_mstar   // m*
);
  localparam int unsigned CW   = $clog2(M + 1);
  localparam int unsigned GMAX = 8;        // largest usable |G|
  localparam int unsigned LW   = PWR_W + CW + GMAX;   // compare width

  // 1/m table, index 0 unused.
  typedef logic [M:0][RECIP_W-1:0] recip_tab_t;
  function automatic recip_tab_t recip_table();
    recip_tab_t t;
    t[0] = '0;
    for (int unsigned m = 1; m <= M; m++)
      t[m] = RECIP_W'(((64'(1) << (RECIP_F + 1)) / 64'(m) + 64'(1)) >> 1);
    return t;
  endfunction
  localparam recip_tab_t RECIP = recip_table();

  // Per-vector state
  pwr_t          prev;        // p_m
  sum_t          sum;         // S_{m-1}
  logic [CW-1:0] m;           // index of prev
  logic          hit;
  sum_t          s_star;
  logic [CW-1:0] m_star;
  logic          fin;         // finishing clock after in_last
  // Normalisation stage
  logic          nrm;
  sum_t          nrm_s;
  logic [CW-1:0] nrm_m;
  logic          nrm_hit;
  sum_t          nrm_sm;

  // Hit test for the arriving sample
  sum_t          s_m;
  pwr_t          delta;
  logic [LW-1:0] lhs, rhs;
  int            g;
  logic          cond;
  always_comb begin
    s_m   = sat_add(sum, prev);
    delta = (in_pwr >= prev) ? in_pwr - prev : '0;
    if (m <= CW'(M1))      g = G1;
    else if (m <= CW'(M2)) g = G2;
    else                   g = G3;
    lhs = LW'(m) * LW'(delta);
    rhs = LW'(s_m);
    if (g >= 0) rhs = rhs << g;
    else        lhs = lhs << (-g);
    cond = (lhs >= rhs) && (s_m != '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev <= '0; sum <= '0; m <= '0; hit <= 1'b0;
      s_star <= '0; m_star <= '0; fin <= 1'b0;
      nrm <= 1'b0; nrm_s <= '0; nrm_sm <= '0; nrm_m <= '0; nrm_hit <= 1'b0;
      out_valid <= 1'b0; out_n0 <= '0; out_sm <= '0;
      out_hit <= 1'b0; out_mstar <= '0;
    end else begin
      fin <= 1'b0;
      if (in_valid) begin
        if (in_first) begin
          prev <= in_pwr;
          sum  <= '0;
          m    <= CW'(1);
          hit  <= 1'b0;
        end else begin
          if (cond && !hit) begin
            hit    <= 1'b1;
            s_star <= s_m;
            m_star <= m;
          end
          prev <= in_pwr;
          sum  <= s_m;
          m    <= m + 1'b1;
        end
        fin <= in_last;
      end

      // Finishing clock: S_M = S_{M-1} + p_M, fallback m* = M.
      nrm <= fin;
      if (fin) begin
        nrm_hit <= hit;
        nrm_sm  <= s_m;
        if (hit) begin
          nrm_s <= s_star;
          nrm_m <= m_star;
        end else begin
          nrm_s <= s_m;
          nrm_m <= CW'(M);
        end
      end

      // Normalisation: N0^ = S_m* * (1/m*)
      out_valid <= nrm;
      if (nrm) begin
        out_n0    <= N0_W'((64'(nrm_s) * 64'(RECIP[nrm_m])) >> RECIP_F);
        out_sm    <= nrm_sm;
        out_hit   <= nrm_hit;
        out_mstar <= nrm_m;
      end
    end
  end

  initial begin
    assert (M >= 2 && M1 <= M2 && M2 <= M) else $error("separating_unit: bad M/M1/M2");
    assert (G1 <= int'(GMAX) && G2 <= int'(GMAX) && G3 <= int'(GMAX) &&
            -G1 <= int'(GMAX) && -G2 <= int'(GMAX) && -G3 <= int'(GMAX))
      else $error("separating_unit: |G| too large");
  end
endmodule
