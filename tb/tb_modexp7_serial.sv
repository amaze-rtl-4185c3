// Self-checking testbench of modexp7_serial with one and with two
// Russian-peasant multipliers: requests offered back to back must be taken
// one at a time, each result must equal x^7 mod p (six reference
// multiplications), and the accept-to-result time must be 3 x 256 + 1 = 769
// cycles (two multipliers) or 4 x 256 + 1 = 1025 cycles (one multiplier).
module tb_modexp7_serial;
  import amaze_pkg::*;
  import amaze_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic v2, r2, o2, v1, r1, o1;
  felem_t x2i, y2, x1i, y1;
  logic [7:0] s2i, s2o, s1i, s1o;

  modexp7_serial #(.NUM_MULT(2), .SB_W(8)) dut2 (.clk, .rst_n, .in_valid(v2), .in_ready(r2), .in_x(x2i), .in_sb(s2i),
                                                .out_valid(o2), .out_y(y2), .out_sb(s2o));
  modexp7_serial #(.NUM_MULT(1), .SB_W(8)) dut1 (.clk, .rst_n, .in_valid(v1), .in_ready(r1), .in_x(x1i), .in_sb(s1i),
                                                .out_valid(o1), .out_y(y1), .out_sb(s1o));

  int checks = 0, failures = 0, cyc = 0, held = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    v1 = 0; v2 = 0; x1i = '0; x2i = '0; s1i = '0; s2i = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6; n++) begin
      int t0;
      felem_t e;
      @(negedge clk);
      x2i = (n == 0) ? P_MOD - 1 : rand_fe(); x1i = x2i; s2i = 8'(n); s1i = 8'(n);
      e = ref_pow7(x2i);
      v2 = 1; v1 = 1;
      @(posedge clk); #1; t0 = cyc;
      @(negedge clk);
      // still offering: must be held off while busy
      if (!r2) held++;
      v2 = 0; v1 = 0;
      while (!o2) @(posedge clk);
      #1;
      checks += 3;
      if (y2 !== e || s2o !== 8'(n)) begin failures++; $display("MISMATCH (2) n=%0d", n); end
      if (cyc - t0 != 769) begin failures++; $display("latency (2) %0d", cyc - t0); end
      while (!o1) @(posedge clk);
      #1;
      if (y1 !== e || s1o !== 8'(n)) begin failures++; $display("MISMATCH (1) n=%0d", n); end
      if (cyc - t0 != 1025) begin failures++; $display("latency (1) %0d", cyc - t0); end
      @(posedge clk);
    end
    checks++;
    if (held == 0) failures++;
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
