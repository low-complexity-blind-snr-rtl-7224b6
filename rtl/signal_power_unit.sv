// signal_power_unit -- average signal power estimate
//   Px^ = max( S_M / M - N0^ , 0 ).
//
// S_M (the total power of the vector, ||ybar||^2) is divided by M with a
// right shift, which requires M to be a power of two; N0^ is subtracted and a
// negative difference is replaced by zero. Shift, subtractor and the zero
// multiplexer follow the architecture; the single output register is this
// design's choice. All words are unsigned with FRAC fractional bits.
//
// Timing: out_valid/out_px one clock after in_valid. out_clamped flags that
// the difference was negative and the zero was selected.
module signal_power_unit
  import snr_pkg::*;
#(
  parameter int unsigned M = 64   // vector length, a power of two
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  sum_t in_sm,
  input  n0_t  in_n0,
  output logic out_valid,
  output px_t  out_px,
  output logic out_clamped
);
  localparam int unsigned SH = $clog2(M);
  localparam int unsigned DW = (SUM_W > N0_W ? SUM_W : N0_W) + 1;

  logic signed [DW-1:0] diff;
  always_comb diff = $signed(DW'(in_sm >> SH)) - $signed(DW'(in_n0));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_px      <= '0;
      out_clamped <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_clamped <= diff < 0;
        out_px      <= (diff < 0) ? '0 : PX_W'(diff);
      end
    end
  end

  initial assert ((1 << SH) == M) else $error("signal_power_unit: M must be a power of two");
endmodule
