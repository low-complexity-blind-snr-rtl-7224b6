// tb_sq_mag -- self-checking testbench of sq_mag.
// Drives random and corner-case beamspace samples (including -2.0, the most
// negative value) every clock with random gaps, and checks each output
// against (re^2 + im^2) >> 8 exactly one clock later.
module tb_sq_mag;
  import snr_pkg::*;
  import snr_ref_pkg::ref_sq;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  bs_t  in_re = '0, in_im = '0;
  logic out_valid;
  pwr_t out_pwr;
  int checks = 0, failures = 0;

  sq_mag dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected value pipeline
  logic exp_v = 0;
  int unsigned exp_p = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== exp_v || (exp_v && out_pwr !== 16'(exp_p))) begin
        failures++;
        $display("mismatch: valid %0d/%0d pwr %0d/%0d", out_valid, exp_v, out_pwr, exp_p);
      end
    end
    exp_v <= in_valid;
    exp_p <= ref_sq(int'(in_re), int'(in_im));
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      if (i < 4) begin
        in_re = (i[0]) ? bs_t'(-512) : bs_t'(511);
        in_im = (i[1]) ? bs_t'(-512) : bs_t'(0);
      end else begin
        in_re = bs_t'($urandom);
        in_im = bs_t'($urandom);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
