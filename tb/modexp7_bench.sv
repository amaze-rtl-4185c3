// Drives and checks one modexp7 instance (used by tb_modexp7). It offers
// NREQ requests back to back with in_valid held high, so the unit's
// admission rule is exercised: the first 13 must be taken in 13 consecutive
// cycles, the 14th exactly LAT cycles after the first, and every result
// must equal x^7 mod p (six reference multiplications) and leave exactly LAT
// cycles after its acceptance, in order. A second phase sends sparse random
// requests.
module modexp7_bench #(
  parameter int unsigned NUM_MULT = 1,
  parameter int unsigned LAT      = 52
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   stalls,
  output bit   done
);
  import amaze_pkg::*;
  import amaze_ref_pkg::*;

  localparam int NREQ = 40;

  logic in_valid, in_ready, out_valid;
  felem_t in_x, out_y;
  logic [7:0] in_sb, out_sb;

  modexp7 #(.NUM_MULT(NUM_MULT), .SB_W(8)) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { felem_t y; logic [7:0] sb; int t; } exp_t;
  exp_t q [$];
  int acc_t [$];

  initial begin checks = 0; failures = 0; stalls = 0; end

  always @(posedge clk) if (rst_n) begin
    #1;
    if (out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("[%0d] unexpected output", NUM_MULT); end
      else begin
        e = q.pop_front();
        if (out_y !== e.y || out_sb !== e.sb || cyc - e.t != LAT) begin
          failures++;
          $display("[%0d] MISMATCH sb %0d lat %0d", NUM_MULT, out_sb, cyc - e.t);
        end
      end
    end
  end

  initial begin
    int n;
    done = 0;
    in_valid = 0; in_x = '0; in_sb = '0;
    @(posedge rst_n);
    @(negedge clk);
    // phase 1: back-to-back offer
    n = 0;
    in_x = P_MOD - 1; in_sb = 0; in_valid = 1;
    while (n < NREQ) begin
      @(posedge clk);
      if (in_ready) begin
        q.push_back('{ref_pow7(in_x), in_sb, cyc});
        acc_t.push_back(cyc);
        n++;
        @(negedge clk);
        in_x = (n == 1) ? '0 : rand_fe(); in_sb = 8'(n);
      end else begin
        stalls++;
        @(negedge clk);
      end
    end
    in_valid = 0;
    // admission pattern: 13 consecutive, the 14th LAT cycles after the 1st
    checks += 2;
    if (acc_t[12] - acc_t[0] != 12) begin failures++; $display("[%0d] first 13 not consecutive", NUM_MULT); end
    if (acc_t[13] - acc_t[0] != LAT) begin failures++; $display("[%0d] 14th accepted after %0d", NUM_MULT, acc_t[13] - acc_t[0]); end
    // phase 2: sparse random requests
    for (int i = 0; i < 60; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 3) == 0; in_x = rand_fe(); in_sb = 8'(100 + i);
      @(posedge clk);
      if (in_valid && in_ready) q.push_back('{ref_pow7(in_x), in_sb, cyc});
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT * 4 + 10) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("[%0d] %0d results missing", NUM_MULT, q.size()); end
    done = 1;
  end
endmodule
