// noise_power_estimator -- sorting unit followed by the separating unit.
//
// Receives the squared beamspace magnitudes |ybar_m|^2 of one vector, one
// per clock, sorts them in ascending order (sorting_unit) and streams the
// sorted vector into the separating unit, which finds the boundary m* between
// noise-only and signal-bearing elements and returns the noise power N0^ and
// the total power S_M. The two-unit split follows the architecture.
//
// Interface: in_valid/in_pwr with in_ready (high while the sorter loads);
// out_valid pulses for one clock with N0^, S_M, the hit flag and m*.
// Timing: with the elements back to back, out_valid is set by the 3*M-th
// clock edge after the edge that accepted the first element (M loading,
// M-1 flushing, M sorted elements leaving, 2 in the separating unit); a new
// vector can be loaded 3*M - 1 clocks after the previous one started.
module noise_power_estimator
  import snr_pkg::*;
#(
  parameter int unsigned M  = 64,
  parameter int unsigned M1 = M / 4,
  parameter int unsigned M2 = 3 * M / 4,
  parameter int          G1 = 4,
  parameter int          G2 = 3,
  parameter int          G3 = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  pwr_t                   in_pwr,
  output logic                   in_ready,
  output logic                   out_valid,
  output n0_t                    out_n0,
  output sum_t                   out_sm,
  output logic                   out_hit,
  output logic [$clog2(M+1)-1:0] out_mstar
);
  logic srt_valid, srt_first, srt_last;
  pwr_t srt_data;

  sorting_unit #(.M(M), .W(PWR_W)) u_sort (
    .clk, .rst_n,
    .in_valid, .in_data(in_pwr), .in_ready,
    .out_valid(srt_valid), .out_first(srt_first), .out_last(srt_last),
    .out_data(srt_data)
  );

  separating_unit #(.M(M), .M1(M1), .M2(M2), .G1(G1), .G2(G2), .G3(G3)) u_sep (
    .clk, .rst_n,
    .in_valid(srt_valid), .in_first(srt_first), .in_last(srt_last),
    .in_pwr(srt_data),
    .out_valid, .out_n0, .out_sm, .out_hit, .out_mstar
  );
endmodule
