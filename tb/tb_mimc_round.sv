// Self-checking testbench of mimc_round: 30 requests offered back to back
// (the round unit must hold some off once its 13 slots and add register are
// full), then sparse ones. Each result must equal (x + k + c)^7 mod p from
// the reference package, leave in order, and a request accepted into an
// empty unit must come out exactly 53 cycles later.
module tb_mimc_round;
  import amaze_pkg::*;
  import amaze_ref_pkg::*;

  localparam int LAT = 53;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid;
  felem_t in_x, in_k, in_c, out_y;
  logic [7:0] in_sb, out_sb;

  mimc_round #(.NUM_MULT(1), .SB_W(8)) dut (.*);

  int checks = 0, failures = 0, stalls = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { felem_t y; logic [7:0] sb; int t; } exp_t;
  exp_t q [$];
  int first_lat = -1;

  always @(posedge clk) if (rst_n) begin
    #1;
    if (out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = q.pop_front();
        if (first_lat < 0) first_lat = cyc - e.t;
        if (out_y !== e.y || out_sb !== e.sb) begin
          failures++;
          $display("MISMATCH sb %0d", out_sb);
        end
      end
    end
  end

  task automatic new_req(input int n);
    in_x = rand_fe(); in_k = rand_fe(); in_c = rand_fe(); in_sb = 8'(n);
    if (n == 0) begin in_x = P_MOD - 1; in_k = P_MOD - 1; in_c = P_MOD - 1; end
  endtask

  initial begin
    int n;
    in_valid = 0; in_x = '0; in_k = '0; in_c = '0; in_sb = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    n = 0; new_req(0); in_valid = 1;
    while (n < 30) begin
      @(posedge clk);
      if (in_ready) begin
        q.push_back('{ref_pow7(ref_add(ref_add(in_x, in_k), in_c)), in_sb, cyc});
        n++;
        @(negedge clk); new_req(n);
      end else begin
        stalls++;
        @(negedge clk);
      end
    end
    in_valid = 0;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      new_req(100 + i); in_valid = ($urandom % 4) == 0;
      @(posedge clk);
      if (in_valid && in_ready) q.push_back('{ref_pow7(ref_add(ref_add(in_x, in_k), in_c)), in_sb, cyc});
    end
    @(negedge clk) in_valid = 0;
    repeat (4 * LAT) @(posedge clk);
    checks += 3;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    if (first_lat != LAT) begin failures++; $display("latency %0d, expected %0d", first_lat, LAT); end
    if (stalls == 0) begin failures++; $display("input never held off"); end
    $display("stall cycles %0d, first latency %0d", stalls, first_lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
