// tb_snr_divider -- self-checking testbench of snr_divider.
// Divides random and corner-case operands (N0^ = 0, N0^ = 1, Px^ = 0,
// Px^ = N0^, largest values) and checks floor(Px^ * 256 / N0^), the
// all-ones result for a zero divisor, busy while dividing, and that done
// comes exactly RHO_W + 1 = 25 clocks after start.
module tb_snr_divider;
  import snr_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  px_t  px = '0;
  n0_t  n0 = '0;
  logic busy, done;
  rho_t rho;
  int checks = 0, failures = 0;

  snr_divider dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic divide(int unsigned a, int unsigned b);
    int unsigned expq;
    int n;
    @(negedge clk);
    start = 1; px = px_t'(a); n0 = n0_t'(b);
    @(negedge clk);
    start = 0;
    n = 1;
    while (!done && n < 100) begin
      checks++;
      if (!busy) begin failures++; $display("FAIL busy low"); end
      @(negedge clk);
      n++;
    end
    expq = (b == 0) ? 32'hFFFFFF : (a * 256) / b;
    checks += 2;
    if (n != RHO_W + 1) begin failures++; $display("FAIL latency %0d", n); end
    if (rho != rho_t'(expq)) begin
      failures++;
      $display("FAIL %0d/%0d = %0d exp %0d", a, b, rho, expq);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    divide(0, 0); divide(100, 0); divide(65535, 1); divide(0, 77);
    divide(300, 300); divide(65535, 65535); divide(1, 65535); divide(65535, 2);
    for (int i = 0; i < 2000; i++) begin
      if (i % 2 == 1) divide($urandom % 65536, $urandom % 65536);
      else       divide($urandom % 65536, 1 + $urandom % 200);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
