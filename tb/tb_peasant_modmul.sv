// Self-checking testbench of peasant_modmul: products of random and corner
// operands (0, 1, p-1) compared with (a * b) % p, and the start-to-done
// time checked to be 255 cycles (one load cycle and 254 iterations).
module tb_peasant_modmul;
  import amaze_pkg::*;
  import amaze_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  felem_t a, b, y;
  peasant_modmul dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    start = 0; a = '0; b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      int t0;
      felem_t e;
      @(negedge clk);
      case (n)
        0: begin a = P_MOD - 1; b = P_MOD - 1; end
        1: begin a = '0; b = P_MOD - 1; end
        2: begin a = 254'd1; b = P_MOD - 1; end
        default: begin a = rand_fe(); b = rand_fe(); end
      endcase
      e = ref_mul(a, b);
      start = 1;
      @(posedge clk); #1; t0 = cyc;
      @(negedge clk) start = 0;
      while (!done) @(posedge clk);
      #1;
      checks += 2;
      if (y !== e) begin failures++; $display("MISMATCH n=%0d", n); end
      if (cyc - t0 != 255) begin failures++; $display("latency %0d", cyc - t0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
