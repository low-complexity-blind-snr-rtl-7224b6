// snr_divider -- fixed-point sequential divider for the SNR estimate
//   rho^ = Px^ / N0^.
//
// Px^ and N0^ are unsigned with FRAC fractional bits; the quotient has
// RHO_W bits with FRAC fractional bits, so the dividend is Px^ * 2^FRAC and
// the quotient is floor(Px^ * 2^FRAC / N0^). The unit is a radix-2 restoring
// divider producing one quotient bit per clock, most significant first. That
// the SNR unit is a fixed-point sequential divider follows the architecture;
// the restoring radix-2 algorithm and the divide-by-zero result (all ones,
// the largest SNR the format holds) are this design's choices.
//
// Interface: start (one clock, with dividend/divisor) when busy is low;
// done pulses for one clock with the quotient.
// Timing: done comes RHO_W + 1 clocks after start (one load clock, then one
// clock per quotient bit).
module snr_divider
  import snr_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  px_t  px,
  input  n0_t  n0,
  output logic busy,
  output logic done,
  output rho_t rho
);
  localparam int unsigned NW = RHO_W;            // dividend bits
  localparam int unsigned CW = $clog2(NW + 1);

  logic [NW-1:0]   num;      // remaining dividend bits, MSB first
  logic [N0_W:0]   rem;      // partial remainder
  logic [N0_W-1:0] den;
  logic [NW-1:0]   quo;
  logic [CW-1:0]   cnt;
  logic            dz;

  logic [N0_W:0] trial;
  logic [N0_W:0] shifted;
  always_comb begin
    shifted = {rem[N0_W-1:0], num[NW-1]};
    trial   = shifted - {1'b0, den};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num <= '0; rem <= '0; den <= '0; quo <= '0; cnt <= '0;
      dz <= 1'b0; busy <= 1'b0; done <= 1'b0; rho <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        num  <= NW'({px, FRAC'(0)});
        den  <= n0;
        dz   <= (n0 == '0);
        rem  <= '0;
        quo  <= '0;
        cnt  <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        num <= num << 1;
        if (!trial[N0_W]) begin
          rem <= trial;
          quo <= {quo[NW-2:0], 1'b1};
        end else begin
          rem <= shifted;
          quo <= {quo[NW-2:0], 1'b0};
        end
        if (cnt == CW'(NW - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          rho  <= dz ? '1 : {quo[NW-2:0], !trial[N0_W]};
        end
        cnt <= cnt + 1'b1;
      end
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("snr_divider: start while busy");
endmodule
