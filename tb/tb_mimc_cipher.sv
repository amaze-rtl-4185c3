// Self-checking testbench of mimc_cipher at the full 91 rounds, in both
// configurations: one multiplier per round unit (4823 cycles per request)
// and two (3640 cycles). See mimc_cipher_bench.
module tb_mimc_cipher;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int c1, f1, b1, s1, c2, f2, b2, s2;
  bit d1, d2;
  int checks, failures;

  mimc_cipher_bench #(.NUM_MULT(1), .LAT(91 * 53)) u1 (.clk, .rst_n, .checks(c1), .failures(f1), .batches(b1), .stalls(s1), .done(d1));
  mimc_cipher_bench #(.NUM_MULT(2), .LAT(91 * 40)) u2 (.clk, .rst_n, .checks(c2), .failures(f2), .batches(b2), .stalls(s2), .done(d2));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d1 && d2);
    checks = c1 + c2 + 2;
    failures = f1 + f2;
    if (b1 < 3 || s1 == 0) failures++;
    if (b2 < 3 || s2 == 0) failures++;
    $display("batches %0d/%0d, held-off cycles %0d/%0d", b1, b2, s1, s2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2 + 1);
    $finish;
  end
endmodule
