// tb_sorting_unit -- self-checking testbench of sorting_unit.
// Loads vectors of M values (random, all equal, ascending, descending, small
// range with many duplicates), with random idle clocks between the values,
// and checks that the M outputs come out in ascending order equal to the
// sorted input (queue sort), with out_first/out_last on the first/last
// element. It also checks the timing: the first output 2*M-1 clocks after
// the last input when the inputs are back to back (M load + M-1 flush), the
// vector leaving in M consecutive clocks, and in_ready low outside loading.
module tb_sorting_unit;
  localparam int unsigned M = 16;
  localparam int unsigned W = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [W-1:0] in_data = '0;
  logic in_ready, out_valid, out_first, out_last;
  logic [W-1:0] out_data;
  int checks = 0, failures = 0;

  sorting_unit #(.M(M), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_vector(int kind, bit gaps);
    int unsigned v[$];
    int unsigned exp[$];
    int t_last, t_first_out, n;
    for (int i = 0; i < M; i++) begin
      case (kind)
        0: v.push_back($urandom % 65536);
        1: v.push_back(1234);
        2: v.push_back(i * 100);
        3: v.push_back((M - i) * 100);
        default: v.push_back($urandom % 4);
      endcase
    end
    exp = v;
    exp.sort();
    // load
    for (int i = 0; i < M; i++) begin
      @(negedge clk);
      while (gaps && ($urandom % 3 == 0)) begin
        in_valid = 0;
        @(negedge clk);
      end
      check(in_ready === 1'b1, "in_ready during load");
      in_valid = 1;
      in_data  = W'(v[i]);
    end
    @(negedge clk);
    in_valid = 0;
    t_last = 0;
    // wait for output
    n = 0;
    while (!out_valid) begin
      check(in_ready === 1'b0, "in_ready low while busy");
      @(negedge clk);
      n++;
    end
    // n counts clocks after the clock of the last input
    check(n == M - 1, $sformatf("first output %0d clocks after last-input clock+1 (exp %0d)", n, M - 1));
    for (int i = 0; i < M; i++) begin
      check(out_valid === 1'b1, "out_valid contiguous");
      check(out_data == W'(exp[i]), $sformatf("element %0d: %0d exp %0d", i, out_data, exp[i]));
      check(out_first === (i == 0), "out_first");
      check(out_last === (i == M - 1), "out_last");
      @(negedge clk);
    end
    check(out_valid === 1'b0, "out_valid ends");
    check(in_ready === 1'b1, "ready for next vector");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 5; k++) run_vector(k, 0);
    for (int r = 0; r < 40; r++) run_vector(r % 5 == 4 ? 4 : 0, r % 2 == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
