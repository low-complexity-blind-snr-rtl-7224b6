// fft_model -- behavioural model (not synthesizable) of the streaming FFT
// that maps the antenna-domain vector y to beamspace, ybar = F y, with F the
// unitary M-point DFT matrix, ybar_k = 1/sqrt(M) * sum_n y_n e^{-j 2 pi k n / M}.
//
// It stands in for a vendor pipelined-streaming FFT core. Ports: one
// antenna sample per clock in (in_valid, in_re/in_im: signed ANT_W bits,
// FRAC fractional bits); after M samples the model streams the M beamspace
// samples out in natural order (out_valid, out_re/out_im: signed BS_W bits,
// FRAC fractional bits, rounded and saturated), one per clock while
// out_ready is high. It accepts the next vector only when the previous one
// has been sent. The DFT is evaluated in real arithmetic.
module fft_model
  import snr_pkg::*;
#(
  parameter int unsigned M = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [ANT_W-1:0] in_re,
  input  logic signed [ANT_W-1:0] in_im,
  output logic                    in_ready,
  output logic                    out_valid,
  output bs_t                     out_re,
  output bs_t                     out_im,
  input  logic                    out_ready
);
  real yr [M], yi [M];
  bs_t br [M], bi [M];
  int  n_in, n_out;
  bit  sending;

  function automatic bs_t quant(real v);
    real s;
    int  q;
    s = v * real'(1 << FRAC);
    q = (s >= 0.0) ? int'($floor(s + 0.5)) : -int'($floor(-s + 0.5));
    if (q > (1 << (BS_W - 1)) - 1) q = (1 << (BS_W - 1)) - 1;
    if (q < -(1 << (BS_W - 1)))    q = -(1 << (BS_W - 1));
    return bs_t'(q);
  endfunction

  assign in_ready  = !sending;
  assign out_valid = sending;
  assign out_re    = sending ? br[n_out] : '0;
  assign out_im    = sending ? bi[n_out] : '0;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_in = 0; n_out <= 0; sending <= 0;
    end else if (!sending) begin
      if (in_valid) begin
        yr[n_in] = real'(in_re) / real'(1 << FRAC);
        yi[n_in] = real'(in_im) / real'(1 << FRAC);
        n_in++;
        if (n_in == M) begin
          for (int k = 0; k < M; k++) begin
            real ar, ai, ph;
            ar = 0.0; ai = 0.0;
            for (int n = 0; n < M; n++) begin
              ph = -2.0 * 3.14159265358979 * real'(k * n) / real'(M);
              ar += yr[n] * $cos(ph) - yi[n] * $sin(ph);
              ai += yr[n] * $sin(ph) + yi[n] * $cos(ph);
            end
            br[k] = quant(ar / $sqrt(real'(M)));
            bi[k] = quant(ai / $sqrt(real'(M)));
          end
          n_in = 0; n_out <= 0; sending <= 1;
        end
      end
    end else if (out_ready) begin
      if (n_out == M - 1) begin
        n_out   <= 0;
        sending <= 0;
      end else n_out <= n_out + 1;
    end
  end
endmodule
