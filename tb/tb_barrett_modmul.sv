// Self-checking testbench of barrett_modmul: a stream of operand pairs, one
// per cycle with random gaps, including the corner values 0, 1 and p-1.
// Each result is compared with (a * b) % p from the reference package, the
// sideband must come back with it, and out_valid must follow in_valid by
// exactly 12 cycles.
module tb_barrett_modmul;
  import amaze_pkg::*;
  import amaze_ref_pkg::*;

  localparam int LAT = 12, N = 3000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  felem_t in_a, in_b, out_y;
  logic [15:0] in_sb, out_sb;

  barrett_modmul #(.SB_W(16)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  typedef struct { felem_t y; logic [15:0] sb; int t; } exp_t;
  exp_t q [$];

  always @(posedge clk) cyc <= cyc + 1;

  // checker
  always @(posedge clk) if (rst_n) begin
    #1;
    if (out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = q.pop_front();
        if (out_y !== e.y || out_sb !== e.sb || cyc - e.t != LAT) begin
          failures++;
          if (failures < 6) $display("MISMATCH got %h exp %h lat %0d", out_y, e.y, cyc - e.t);
        end
      end
    end
  end

  initial begin
    in_valid = 0; in_a = '0; in_b = '0; in_sb = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      in_valid = ($urandom % 8) != 0;
      case (n)
        0: begin in_a = P_MOD - 1; in_b = P_MOD - 1; end
        1: begin in_a = '0;        in_b = P_MOD - 1; end
        2: begin in_a = 254'd1;    in_b = P_MOD - 1; end
        3: begin in_a = P_MOD - 1; in_b = 254'd2; end
        default: begin in_a = rand_fe(); in_b = rand_fe(); end
      endcase
      if (n < 4) in_valid = 1;
      in_sb = 16'(n);
      if (in_valid) q.push_back('{ref_mul(in_a, in_b), in_sb, cyc});
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N + 500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
