// tb_workload_sizes -- the estimator at the other array sizes of the
// published FPGA results: M = 16, 32 and 128 antennas (M = 64 is
// tb_full_size). Each size runs in its own size_run harness: antenna-domain
// sparse channels through the behavioural DFT into snr_estimator_top #(M),
// every output compared with the reference model, latency 3*M + 28 clock
// edges checked.
module tb_workload_sizes;
  logic clk = 0, rst_n = 0;
  logic d16, d32, d128;
  int c16, c32, c128, f16, f32, f128;
  int checks, failures;

  size_run #(.M(16),  .NVEC(16)) u16  (.clk, .rst_n, .done(d16),  .checks(c16),  .failures(f16));
  size_run #(.M(32),  .NVEC(16)) u32  (.clk, .rst_n, .done(d32),  .checks(c32),  .failures(f32));
  size_run #(.M(128), .NVEC(16)) u128 (.clk, .rst_n, .done(d128), .checks(c128), .failures(f128));
  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c16 + c32 + c128, f16 + f32 + f128 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (d16 && d32 && d128);
    checks   = c16 + c32 + c128;
    failures = f16 + f32 + f128;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
