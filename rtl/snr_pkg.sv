// snr_pkg -- word lengths, fixed-point types and the result bundle shared by
// the blind noise-power / signal-power / SNR estimator.
//
// All quantities are two's-complement or unsigned fixed point with FRAC = 8
// fractional bits. The widths follow the word lengths the estimator was
// specified with: antenna samples 16 bits, beamspace samples 10 bits, squared
// magnitudes, noise power, total power S_M and signal power 16 bits, SNR 24
// bits. The result bundle (est_t) and the saturating helpers are this
// design's own packaging.
package snr_pkg;

  localparam int unsigned FRAC  = 8;   // fractional bits of every word
  localparam int unsigned ANT_W = 16;  // antenna-domain sample (signed)
  localparam int unsigned BS_W  = 10;  // beamspace sample (signed, Q2.8)
  localparam int unsigned PWR_W = 16;  // |ybar_m|^2 (unsigned, Q8.8)
  localparam int unsigned SUM_W = 16;  // cumulative sum S_m, S_M (unsigned)
  localparam int unsigned N0_W  = 16;  // noise power estimate (unsigned)
  localparam int unsigned PX_W  = 16;  // signal power estimate (unsigned)
  localparam int unsigned RHO_W = 24;  // SNR estimate (unsigned, Q16.8)
  localparam int unsigned RECIP_F = 16; // fractional bits of the 1/m table
  localparam int unsigned RECIP_W = RECIP_F + 1; // holds 1/1 = 1.0

  typedef logic signed [BS_W-1:0]  bs_t;
  typedef logic        [PWR_W-1:0] pwr_t;
  typedef logic        [SUM_W-1:0] sum_t;
  typedef logic        [N0_W-1:0]  n0_t;
  typedef logic        [PX_W-1:0]  px_t;
  typedef logic        [RHO_W-1:0] rho_t;

  // One complete set of estimates for one received vector.
  typedef struct packed {
    n0_t  n0;   // average noise power  N0^
    sum_t sm;   // total power          S_M = ||ybar||^2
    px_t  px;   // average signal power Px^
    rho_t rho;  // SNR                  rho^ = Px^ / N0^
  } est_t;

  // Saturating unsigned add for the cumulative sum.
  function automatic sum_t sat_add(sum_t a, pwr_t b);
    logic [SUM_W:0] s;
    s = {1'b0, a} + (SUM_W+1)'(b);
    return s[SUM_W] ? '1 : s[SUM_W-1:0];
  endfunction

endpackage
