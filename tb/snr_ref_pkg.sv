// snr_ref_pkg -- reference model of the estimator for the testbenches.
//
// Written straight from the algorithm, with none of the hardware's
// structure: the vector is sorted with the queue sort method, the hit test is
// evaluated in real arithmetic as m*Delta_m >= 2^G * S_m, the 1/m table entry
// is recomputed as round(2^16/m), Px and the SNR quotient use plain integer
// arithmetic. The fixed-point conventions (truncation, saturating sum at
// 0xFFFF, no hit on a zero running sum, all-ones SNR for N0 = 0) are the ones
// the RTL documents.
package snr_ref_pkg;

  typedef struct {
    int unsigned n0;
    int unsigned sm;
    int unsigned px;
    int unsigned rho;
    bit          hit;
    int unsigned mstar;
    bit          clamped;
    int          region;    // 1..3: gamma interval of the hit, 0: none
  } ref_t;

  function automatic int unsigned ref_sq(int re, int im);
    return (re * re + im * im) >> 8;
  endfunction

  function automatic ref_t ref_estimate(int unsigned p[$], int unsigned M,
                                        int unsigned M1, int unsigned M2,
                                        int G1, int G2, int G3);
    ref_t r;
    int unsigned s[$];
    longint unsigned cum [$];
    longint unsigned acc;
    longint unsigned sstar;
    real g;
    s = p;
    s.sort();
    acc = 0;
    for (int i = 0; i < M; i++) begin
      acc += longint'(s[i]);
      if (acc > 65535) acc = 65535;
      cum.push_back(acc);
    end
    r.hit = 0; r.mstar = M; r.region = 0;
    for (int unsigned m = 1; m < M; m++) begin
      g = (m <= M1) ? 2.0 ** G1 : (m <= M2) ? 2.0 ** G2 : 2.0 ** G3;
      if (cum[m-1] != 0 && real'(m) * real'(s[m] - s[m-1]) >= g * real'(cum[m-1])) begin
        r.hit = 1; r.mstar = m;
        r.region = (m <= M1) ? 1 : (m <= M2) ? 2 : 3;
        break;
      end
    end
    sstar = cum[r.mstar-1];
    r.sm  = int'(cum[M-1]);
    r.n0  = int'((sstar * ((2 * (longint'(1) << 16) / longint'(r.mstar) + 1) / 2)) >> 16);
    begin
      int d;
      d = int'(r.sm / M) - int'(r.n0);
      r.clamped = d < 0;
      r.px = (d < 0) ? 0 : d;
    end
    r.rho = (r.n0 == 0) ? 32'hFFFFFF : (r.px * 256) / r.n0;
    return r;
  endfunction

endpackage
