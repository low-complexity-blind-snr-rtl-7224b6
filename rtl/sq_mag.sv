// sq_mag -- element-wise squared-magnitude operator.
//
// Takes one complex beamspace sample per clock (real and imaginary parts,
// signed, BS_W bits with FRAC fractional bits) and returns re^2 + im^2 as an
// unsigned PWR_W-bit word with FRAC fractional bits, one clock later. The
// two squares and the adder follow the structure of the preprocessing unit;
// the full-precision sum carries 2*FRAC fractional bits and the low FRAC of
// them are dropped (truncation). With 10-bit inputs the largest result is
// 8.0, so the 16-bit output never overflows. Reset clears the output valid; the registered data is
// cleared too so that nothing undefined is ever read.
//
// Timing: out_valid/out_pwr appear exactly one clock after
// in_valid/in_re/in_im. No back-pressure: the stream runs at one
// sample per clock, as the FFT delivers it.
module sq_mag
  import snr_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  bs_t  in_re,
  input  bs_t  in_im,
  output logic out_valid,
  output pwr_t out_pwr
);
  localparam int unsigned SQ_W = 2*BS_W;          // one square, unsigned
  logic [SQ_W-1:0] re2, im2;
  logic [SQ_W:0]   sum2;

  always_comb begin
    re2  = SQ_W'(32'(in_re) * 32'(in_re));
    im2  = SQ_W'(32'(in_im) * 32'(in_im));
    sum2 = {1'b0, re2} + {1'b0, im2};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pwr   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_pwr <= PWR_W'(sum2 >> FRAC);
    end
  end
endmodule
