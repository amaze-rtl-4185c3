// End-to-end testbench of the accelerator top (mimc_hash) at its default
// parameters: 91 rounds, one multiplier, 13 lanes.
//
// The host model sends an ordered list of requests: hash messages of 1 to 3
// blocks on lanes 0..11 and raw cipher requests on lane 12. The list opens
// with two blocks of the same lane, so the second must be held off until
// the first has come back (lane-busy stall) and the requests behind it wait
// too. Every result is compared with a reference Miyaguchi-Preneel hash
// (y_0 = 0, y_i = MiMC(x_i, y_{i-1}) + y_{i-1} + x_i) or reference cipher
// output, and must appear 4823 + 1 cycles after its request was accepted.
// The mechanisms the design has are counted and each must occur: a full
// batch of 13, a request held off by a running batch, a lane-busy stall,
// both modes within one batch, chaining over several blocks, and a digest.
module tb_mimc_hash;
  import amaze_pkg::*;
  import amaze_ref_pkg::*;

  localparam int LAT = 91 * 53 + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, req_mode, req_first, req_last;
  logic [3:0] req_lane;
  felem_t req_x, req_k;
  logic res_valid, res_mode, busy;
  logic [3:0] res_lane;
  felem_t res_y;

  mimc_hash dut (.*);

  typedef struct {
    logic mode; logic [3:0] lane; logic first; logic last;
    felem_t x; felem_t k; felem_t exp_y;
  } req_t;

  req_t   reqs [$];
  felem_t cst [];
  felem_t chain_ref [13];
  int checks = 0, failures = 0, cyc = 0;
  int n_full_batch = 0, n_held_batch = 0, n_lane_stall = 0, n_mixed = 0,
      n_chained = 0, n_digest = 0, n_cipher = 0;

  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { felem_t y; logic mode; logic [3:0] lane; int t; } exp_t;
  exp_t q [$];

  always @(posedge clk) if (rst_n) begin
    #1;
    if (res_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("unexpected result"); end
      else begin
        e = q.pop_front();
        if (res_y !== e.y || res_mode !== e.mode || res_lane !== e.lane || cyc - e.t != LAT) begin
          failures++;
          $display("MISMATCH lane %0d mode %0d lat %0d", res_lane, res_mode, cyc - e.t);
        end
        if (res_mode) n_digest++; else n_cipher++;
      end
    end
  end

  function automatic req_t mk_hash(input int lane, input int blk, input int nblk);
    req_t r;
    felem_t y;
    r.mode = 1; r.lane = 4'(lane); r.first = (blk == 0); r.last = (blk == nblk - 1);
    r.x = rand_fe(); r.k = '0;
    y = r.first ? '0 : chain_ref[lane];
    y = ref_add(ref_add(ref_mimc(r.x, y, cst, ROUNDS), y), r.x);
    chain_ref[lane] = y;
    r.exp_y = y;
    return r;
  endfunction

  function automatic req_t mk_cipher(input int lane);
    req_t r;
    r.mode = 0; r.lane = 4'(lane); r.first = 0; r.last = 0;
    r.x = rand_fe(); r.k = rand_fe();
    r.exp_y = ref_mimc(r.x, r.k, cst, ROUNDS);
    return r;
  endfunction

  initial begin
    felem_t tmp [ROUNDS+1];
    int nblk [12];
    int accepted_in_batch, lane_of_head;
    logic [12:0] pending_lane;
    $readmemh(CONST_FILE, tmp);
    cst = new[ROUNDS+1];
    foreach (tmp[i]) cst[i] = tmp[i];
    // request list
    reqs.push_back(mk_hash(5, 0, 2));
    reqs.push_back(mk_hash(5, 1, 2));          // same lane: must wait
    for (int l = 0; l < 12; l++) nblk[l] = 1 + (l % 3);
    nblk[5] = 0;
    for (int b = 0; b < 3; b++) begin
      for (int l = 0; l < 12; l++) if (b < nblk[l]) reqs.push_back(mk_hash(l, b, nblk[l]));
      reqs.push_back(mk_cipher(12));
    end

    req_valid = 0; req_mode = 0; req_lane = '0; req_first = 0; req_last = 0;
    req_x = '0; req_k = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    pending_lane = '0;
    accepted_in_batch = 0;
    while (reqs.size() != 0) begin
      req_t r;
      @(negedge clk);
      r = reqs[0];
      req_valid = 1; req_mode = r.mode; req_lane = r.lane; req_first = r.first;
      req_last = r.last; req_x = r.x; req_k = r.k;
      @(posedge clk);
      if (req_ready) begin
        if (!busy) accepted_in_batch = 0;
        accepted_in_batch++;
        if (accepted_in_batch == 13) n_full_batch++;
        if (r.mode && !r.first) n_chained++;
        if (!r.mode || r.last) q.push_back('{r.exp_y, r.mode, r.lane, cyc});
        void'(reqs.pop_front());
      end else if (busy && pending_lane[r.lane]) n_lane_stall++;
      else n_held_batch++;
      // lane bookkeeping of the host model
      if (req_ready) pending_lane[r.lane] = 1'b1;
      if (!busy) pending_lane = req_ready ? (13'(1) << r.lane) : '0;
    end
    @(negedge clk) req_valid = 0;
    @(posedge clk);
    wait (!busy);
    repeat (5) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    n_mixed = (n_cipher > 0 && n_digest > 0) ? 1 : 0;
    $display("full batches %0d, held by running batch %0d, lane-busy stalls %0d, chained blocks %0d, digests %0d, cipher results %0d",
             n_full_batch, n_held_batch, n_lane_stall, n_chained, n_digest, n_cipher);
    checks += 6;
    if (n_full_batch == 0) failures++;
    if (n_held_batch == 0) failures++;
    if (n_lane_stall == 0) failures++;
    if (n_chained == 0) failures++;
    if (n_digest == 0) failures++;
    if (n_mixed == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
