// Drives and checks one mimc_cipher instance (used by tb_mimc_cipher).
// Phase 1 offers 20 requests back to back: the first 13 must be taken in 13
// consecutive cycles (one full batch), the rest held off until the batch has
// left. Phase 2 sends a sparse batch with gaps inside the admission window.
// Every result must equal the reference MiMC(x, k), carry its key and tag,
// and leave exactly LAT = 91 x (cycles per round) cycles after acceptance.
module mimc_cipher_bench #(
  parameter int unsigned NUM_MULT = 1,
  parameter int unsigned LAT      = 4823
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   batches,
  output int   stalls,
  output bit   done
);
  import amaze_pkg::*;
  import amaze_ref_pkg::*;

  localparam int NREQ = 20;

  logic in_valid, in_ready, out_valid, busy;
  felem_t in_x, in_k, out_y, out_k;
  logic [5:0] in_tag, out_tag;

  mimc_cipher #(.NUM_MULT(NUM_MULT), .TAG_W(6)) dut (.*);

  felem_t cst [];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { felem_t y; felem_t k; logic [5:0] tag; int t; } exp_t;
  exp_t q [$];
  int acc_t [$];

  initial begin checks = 0; failures = 0; batches = 0; stalls = 0; end

  always @(posedge clk) if (rst_n) begin
    #1;
    if (out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("[%0d] unexpected output", NUM_MULT); end
      else begin
        e = q.pop_front();
        if (out_y !== e.y || out_k !== e.k || out_tag !== e.tag || cyc - e.t != LAT) begin
          failures++;
          $display("[%0d] MISMATCH tag %0d lat %0d", NUM_MULT, out_tag, cyc - e.t);
        end
      end
    end
  end

  // count batches: busy rising
  logic busy_d = 0;
  always @(posedge clk) begin
    busy_d <= busy;
    if (rst_n && busy && !busy_d) batches++;
  end

  task automatic push_req();
    q.push_back('{ref_mimc(in_x, in_k, cst, ROUNDS), in_k, in_tag, cyc});
  endtask

  initial begin
    int n;
    felem_t tmp [ROUNDS+1];
    done = 0;
    $readmemh(CONST_FILE, tmp);
    cst = new[ROUNDS+1];
    foreach (tmp[i]) cst[i] = tmp[i];
    in_valid = 0; in_x = '0; in_k = '0; in_tag = '0;
    @(posedge rst_n);
    @(negedge clk);
    n = 0;
    in_x = P_MOD - 1; in_k = P_MOD - 1; in_tag = 0; in_valid = 1;
    while (n < NREQ) begin
      @(posedge clk);
      if (in_ready) begin
        push_req(); acc_t.push_back(cyc); n++;
        @(negedge clk);
        in_x = (n == 1) ? '0 : rand_fe(); in_k = (n == 1) ? '0 : rand_fe(); in_tag = 6'(n);
      end else begin
        stalls++;
        @(negedge clk);
      end
    end
    in_valid = 0;
    checks += 2;
    if (acc_t[12] - acc_t[0] != 12) begin failures++; $display("[%0d] batch not consecutive", NUM_MULT); end
    if (acc_t[13] - acc_t[0] < LAT) begin failures++; $display("[%0d] 14th request entered a running batch", NUM_MULT); end
    wait (!busy);
    // phase 2: sparse batch
    for (int i = 0; i < 13; i++) begin
      @(negedge clk);
      in_valid = (i % 3) == 0; in_x = rand_fe(); in_k = rand_fe(); in_tag = 6'(40 + i);
      @(posedge clk);
      if (in_valid && in_ready) push_req();
    end
    @(negedge clk) in_valid = 0;
    @(posedge clk);
    wait (!busy);
    repeat (5) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("[%0d] %0d results missing", NUM_MULT, q.size()); end
    done = 1;
  end
endmodule
