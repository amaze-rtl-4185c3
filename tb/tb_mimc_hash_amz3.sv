// End-to-end testbench of the DSP-free configuration of the top
// (mimc_hash with MODMUL = 1, NUM_MULT = 2: two Russian-peasant multipliers,
// one request at a time). A two-block hash on lane 0 and a raw cipher
// request on lane 1 are offered back to back; the top must take them one at
// a time, return the reference digest and cipher output, and each result
// must appear 91 x 770 + 1 = 70071 cycles after its acceptance.
module tb_mimc_hash_amz3;
  import amaze_pkg::*;
  import amaze_ref_pkg::*;

  localparam int LAT = 91 * 770 + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, req_mode, req_first, req_last;
  logic [3:0] req_lane;
  felem_t req_x, req_k;
  logic res_valid, res_mode, busy;
  logic [3:0] res_lane;
  felem_t res_y;

  mimc_hash #(.MODMUL(1), .NUM_MULT(2)) dut (.*);

  felem_t cst [];
  int checks = 0, failures = 0, cyc = 0, held = 0;
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
          $display("MISMATCH lane %0d lat %0d", res_lane, cyc - e.t);
        end
      end
    end
  end

  task automatic send(input logic mode, input int lane, input logic first, input logic last,
                      input felem_t x, input felem_t k, input felem_t exp_y, input bit expect_res);
    @(negedge clk);
    req_valid = 1; req_mode = mode; req_lane = 4'(lane); req_first = first; req_last = last;
    req_x = x; req_k = k;
    @(posedge clk);
    while (!req_ready) begin
      held++;
      @(posedge clk);
    end
    if (expect_res) q.push_back('{exp_y, mode, 4'(lane), cyc});
    @(negedge clk) req_valid = 0;
  endtask

  initial begin
    felem_t tmp [ROUNDS+1];
    felem_t x1, x2, y1, y2, cx, ck;
    $readmemh(CONST_FILE, tmp);
    cst = new[ROUNDS+1];
    foreach (tmp[i]) cst[i] = tmp[i];
    x1 = rand_fe(); x2 = rand_fe(); cx = rand_fe(); ck = rand_fe();
    y1 = ref_add(ref_add(ref_mimc(x1, '0, cst, ROUNDS), '0), x1);
    y2 = ref_add(ref_add(ref_mimc(x2, y1, cst, ROUNDS), y1), x2);
    req_valid = 0; req_mode = 0; req_lane = '0; req_first = 0; req_last = 0;
    req_x = '0; req_k = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    send(1, 0, 1, 0, x1, '0, y1, 0);
    send(1, 0, 0, 1, x2, '0, y2, 1);
    send(0, 1, 0, 0, cx, ck, ref_mimc(cx, ck, cst, ROUNDS), 1);
    @(posedge clk);
    wait (!busy);
    repeat (5) @(posedge clk);
    checks += 2;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    if (held == 0) begin failures++; $display("requests never held off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (220000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
