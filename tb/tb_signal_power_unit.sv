// tb_signal_power_unit -- self-checking testbench of signal_power_unit.
// Applies random and corner-case (S_M, N0^) pairs, including N0^ larger than
// S_M / M (the zero clamp) and equal values, and checks Px^ =
// max(floor(S_M / M) - N0^, 0), the clamp flag and the one-clock latency.
module tb_signal_power_unit;
  import snr_pkg::*;
  localparam int unsigned M = 64;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  sum_t in_sm = '0;
  n0_t  in_n0 = '0;
  logic out_valid, out_clamped;
  px_t  out_px;
  int checks = 0, failures = 0, clamps = 0;

  signal_power_unit #(.M(M)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_sm = sum_t'($urandom);
      case (i % 3)
        0: in_n0 = n0_t'($urandom % 1100);
        1: in_n0 = n0_t'(int'(in_sm) / M);
        default: in_n0 = n0_t'($urandom);
      endcase
      d = int'(in_sm) / M - int'(in_n0);
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_px != px_t'(d < 0 ? 0 : d) || out_clamped != (d < 0)) begin
        failures++;
        $display("FAIL sm %0d n0 %0d px %0d exp %0d", in_sm, in_n0, out_px, d);
      end
      if (d < 0) clamps++;
    end
    checks++;
    if (clamps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
