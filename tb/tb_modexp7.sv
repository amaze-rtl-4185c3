// Self-checking testbench of modexp7 in both configurations: one multiplier
// (latency 52) and two multipliers (latency 39). See modexp7_bench.
module tb_modexp7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int c1, f1, s1, c2, f2, s2;
  bit d1, d2;
  int checks, failures;

  modexp7_bench #(.NUM_MULT(1), .LAT(52)) b1 (.clk, .rst_n, .checks(c1), .failures(f1), .stalls(s1), .done(d1));
  modexp7_bench #(.NUM_MULT(2), .LAT(39)) b2 (.clk, .rst_n, .checks(c2), .failures(f2), .stalls(s2), .done(d2));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d1 && d2);
    checks = c1 + c2 + 2;
    failures = f1 + f2;
    // the admission stall must have happened in both units
    if (s1 == 0) failures++;
    if (s2 == 0) failures++;
    $display("stall cycles: %0d (one multiplier), %0d (two multipliers)", s1, s2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2 + 1);
    $finish;
  end
endmodule
