// Pipelined Barrett modular multiplier over the BN254 scalar field,
// y = a * b mod p, latency 12 cycles, one new operand pair per cycle.
//
// Barrett reduction replaces the division by p with two multiplications by
// constants: with n = 254 and Z = floor(2^(2n) / p),
//   w = a * b                    (int_mult M1, 254 x 254)
//   t = (w >> (n-1)) * Z         (int_mult M2, 255 x 255)
//   u = (t >> (n+1)) * p         (int_mult M3, 255 x 254)
//   y = w - u, then up to two subtractions of p.
// The quotient estimate t >> (n+1) is at most 2 below floor(w/p), so w - u
// lies in [0, 3p) and only its low bits are needed.
//
// Pipeline (cycle in which a value is registered, counting the operand
// cycle as 0): w at 3, the transfer register holding w >> (n-1) at 4, t at 7,
// the transfer register holding t >> (n+1) at 8, u at 11, and the reduced y
// at 12. Each integer multiplication thus costs its 3 stages plus one
// transfer register, 4 cycles, and three of them make the 12-cycle pipeline.
// The low bits of w are delayed alongside. A caller-defined sideband (SB_W
// bits) and the valid bit travel with the operands and leave with y.
//
// Interface: in_valid/in_a/in_b/in_sb are sampled every cycle (no
// back-pressure, the unit can always accept). out_valid/out_y/out_sb follow
// 12 cycles later. Operands must be below p.
//
// From the paper: the algorithm, the three integer multipliers, the four
// cycles per multiplication and the 12-cycle latency. This design's own
// choices: the final subtraction is done on n+2 low bits instead of the
// paper's n+1, because 3p exceeds 2^(n+1) and a quotient estimate that is 2
// short would otherwise wrap; the corrections use y >= p where the paper
// writes y > p, so that y = p is reduced to 0; and the subtraction and both
// corrections share the last (transfer) cycle.
//
// Lint notes: the low bits of t, the high bits of u and the top two bits of
// the corrected result are unused on purpose (t is only needed shifted, u and
// w only modulo 2^(n+2), and the corrected result is below p).
module barrett_modmul
  import amaze_pkg::*;
#(
  parameter int unsigned SB_W  = 1,  // sideband bits carried with the data
  parameter int unsigned CHUNK = 27  // y chunk width of the integer multipliers
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  felem_t          in_a,
  input  felem_t          in_b,
  input  logic [SB_W-1:0] in_sb,
  output logic            out_valid,
  output felem_t          out_y,
  output logic [SB_W-1:0] out_sb
);

  localparam int unsigned N     = BARRETT_N;
  localparam int unsigned LAT   = 12;
  localparam int unsigned LOW_W = N + 2;     // bits kept of w and u

  // ---- M1: w = a * b ------------------------------------------------------
  logic [2*N-1:0] w;
  int_mult #(.AW(N), .BW(N), .CHUNK(CHUNK)) u_m1 (.clk(clk), .x(in_a), .y(in_b), .p(w));

  // transfer register 1 (cycle 4)
  logic [N:0]       q1_q;        // w >> (n-1), 255 bits
  logic [LOW_W-1:0] w_low_q4;
  always_ff @(posedge clk) begin
    q1_q     <= w[2*N-1:N-1];
    w_low_q4 <= w[LOW_W-1:0];
  end

  // ---- M2: t = q1 * Z -----------------------------------------------------
  logic [2*N+1:0] t;
  int_mult #(.AW(N+1), .BW(N+1), .CHUNK(CHUNK)) u_m2 (.clk(clk), .x(q1_q), .y(BARRETT_Z), .p(t));

  // transfer register 2 (cycle 8)
  logic [N:0] q3_q;              // t >> (n+1), 255 bits
  always_ff @(posedge clk) q3_q <= t[2*N+1:N+1];

  // ---- M3: u = q3 * p -----------------------------------------------------
  logic [2*N:0] u;
  int_mult #(.AW(N+1), .BW(N), .CHUNK(CHUNK)) u_m3 (.clk(clk), .x(q3_q), .y(P_MOD), .p(u));

  // low bits of w, delayed from cycle 4 to cycle 11 (7 more registers)
  logic [LOW_W-1:0] w_low_dly [7];
  always_ff @(posedge clk) begin
    w_low_dly[0] <= w_low_q4;
    for (int i = 1; i < 7; i++) w_low_dly[i] <= w_low_dly[i-1];
  end

  // ---- final subtraction and corrections, registered at cycle 12 ----------
  logic [LOW_W-1:0] r0, r1, r2;
  localparam logic [LOW_W-1:0] P_EXT = LOW_W'(P_MOD);
  always_comb begin
    r0 = w_low_dly[6] - u[LOW_W-1:0];
    r1 = (r0 >= P_EXT) ? r0 - P_EXT : r0;
    r2 = (r1 >= P_EXT) ? r1 - P_EXT : r1;
  end

  always_ff @(posedge clk) out_y <= r2[N-1:0];

  // ---- control: valid and sideband delayed by the full latency ------------
  logic            vld_dly [LAT];
  logic [SB_W-1:0] sb_dly  [LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) vld_dly[i] <= 1'b0;
    end else begin
      vld_dly[0] <= in_valid;
      for (int i = 1; i < LAT; i++) vld_dly[i] <= vld_dly[i-1];
    end
  end
  always_ff @(posedge clk) begin
    sb_dly[0] <= in_sb;
    for (int i = 1; i < LAT; i++) sb_dly[i] <= sb_dly[i-1];
  end

  assign out_valid = vld_dly[LAT-1];
  assign out_sb    = sb_dly[LAT-1];

endmodule
