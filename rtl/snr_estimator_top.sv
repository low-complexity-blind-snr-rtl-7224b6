// snr_estimator_top -- blind noise power, signal power and SNR estimator for
// one beamspace vector of an M-antenna receiver.
//
// Data path: the beamspace samples ybar_m (complex, from the FFT that maps
// the antenna vector to beamspace, which sits outside this module) enter one
// per clock; sq_mag forms |ybar_m|^2; noise_power_estimator sorts the powers
// and finds N0^ and S_M; signal_power_unit forms Px^ = max(S_M/M - N0^, 0);
// snr_divider forms rho^ = Px^ / N0^. The result registers hold N0^, S_M and
// Px^ until the SNR is ready, so all four estimates leave together.
//
// Interface: in_valid/in_re/in_im carry one beamspace sample per clock, M
// samples per vector; a sample is taken on a clock edge where in_valid and
// in_ready are both high (in_ready is high while the sorter can load). out_valid pulses for one clock
// with the estimates (est_t: n0, sm, px, rho), the hit flag (a noise/signal
// boundary was found), m* (number of elements taken as noise) and
// out_clamped (S_M/M - N0^ was negative and Px^ was set to zero).
// Timing: out_valid comes 3*M + RHO_W + 5 clocks after the first sample of
// the vector was accepted (1 squaring, 3*M+2 noise estimator, 1 signal
// power, RHO_W+1 divider); the next vector can start 3*M clocks after the
// previous one.
module snr_estimator_top
  import snr_pkg::*;
#(
  parameter int unsigned M  = 64,        // antennas, a power of two
  parameter int unsigned M1 = M / 4,     // end of the gamma_1 interval
  parameter int unsigned M2 = 3 * M / 4, // end of the gamma_2 interval
  parameter int          G1 = 4,         // gamma_1 = 2^G1
  parameter int          G2 = 3,         // gamma_2 = 2^G2
  parameter int          G3 = 2          // gamma_3 = 2^G3
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  bs_t                    in_re,
  input  bs_t                    in_im,
  output logic                   in_ready,
  output logic                   out_valid,
  output est_t                   out_est,
  output logic                   out_hit,
  output logic [$clog2(M+1)-1:0] out_mstar,
  output logic                   out_clamped
);
  localparam int unsigned CW = $clog2(M + 1);

  // Squaring
  logic sq_valid;
  pwr_t sq_pwr;
  logic ld_ready;
  sq_mag u_sq (
    .clk, .rst_n, .in_valid(in_valid && in_ready), .in_re, .in_im,
    .out_valid(sq_valid), .out_pwr(sq_pwr)
  );

  // The squarer adds one clock, so the sorter's ready is looked at one clock
  // ahead: the sample being squared is always one the sorter can load.
  // in_ready is high while the sorter loads and the current vector still
  // needs samples.
  logic [CW-1:0] in_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_cnt <= '0;
    else if (in_valid && in_ready) in_cnt <= (in_cnt == CW'(M - 1)) ? '0 : in_cnt + 1'b1;
  end
  logic in_blocked;   // the vector is complete, waiting for the sorter
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_blocked <= 1'b0;
    else if (in_valid && in_ready && in_cnt == CW'(M - 1)) in_blocked <= 1'b1;
    else if (!ld_ready) in_blocked <= 1'b0;
  end
  assign in_ready = ld_ready && !in_blocked;

  // Noise power
  logic          np_valid, np_hit;
  n0_t           np_n0;
  sum_t          np_sm;
  logic [CW-1:0] np_mstar;
  noise_power_estimator #(.M(M), .M1(M1), .M2(M2), .G1(G1), .G2(G2), .G3(G3)) u_np (
    .clk, .rst_n,
    .in_valid(sq_valid), .in_pwr(sq_pwr), .in_ready(ld_ready),
    .out_valid(np_valid), .out_n0(np_n0), .out_sm(np_sm),
    .out_hit(np_hit), .out_mstar(np_mstar)
  );

  // Signal power
  logic sp_valid, sp_clamped;
  px_t  sp_px;
  signal_power_unit #(.M(M)) u_sp (
    .clk, .rst_n,
    .in_valid(np_valid), .in_sm(np_sm), .in_n0(np_n0),
    .out_valid(sp_valid), .out_px(sp_px), .out_clamped(sp_clamped)
  );

  // Hold N0^, S_M, hit and m* until the divider is done
  n0_t           h_n0;
  sum_t          h_sm;
  logic          h_hit;
  logic [CW-1:0] h_mstar;
  logic          h_clamped;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_n0 <= '0; h_sm <= '0; h_hit <= 1'b0; h_mstar <= '0;
    end else if (np_valid) begin
      h_n0 <= np_n0; h_sm <= np_sm; h_hit <= np_hit; h_mstar <= np_mstar;
    end
  end

  // SNR
  logic div_busy, div_done;
  rho_t div_rho;
  px_t  h_px;
  snr_divider u_div (
    .clk, .rst_n,
    .start(sp_valid), .px(sp_px), .n0(h_n0),
    .busy(div_busy), .done(div_done), .rho(div_rho)
  );
  // A vector takes 3*M clocks, the division RHO_W + 1: for M >= 16 the
  // divider is always free when the next Px^ arrives.
  a_div_free: assert property (@(posedge clk) disable iff (!rst_n) sp_valid |-> !div_busy)
    else $error("snr_estimator_top: divider busy when a new Px^ arrived");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_px <= '0; h_clamped <= 1'b0;
    end else if (sp_valid) begin
      h_px <= sp_px; h_clamped <= sp_clamped;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_est   <= '0;
      out_hit   <= 1'b0;
      out_mstar <= '0;
      out_clamped <= 1'b0;
    end else begin
      out_valid <= div_done;
      if (div_done) begin
        out_est.n0  <= h_n0;
        out_est.sm  <= h_sm;
        out_est.px  <= h_px;
        out_est.rho <= div_rho;
        out_hit     <= h_hit;
        out_mstar   <= h_mstar;
        out_clamped <= h_clamped;
      end
    end
  end
endmodule
