// MiMC-p/p block cipher over the BN254 scalar field, batch-pipelined.
//
//   y = MiMC(x, k):  for i = 0 .. r-1:  x = (x + k + c_i)^7 mod p
//                    y = x + k + c_r mod p
// with r = 91 rounds.
//
// The rounds of one request are strictly serial, so throughput comes from
// running up to BATCH_P = 13 independent requests through one round unit
// (mimc_round) at the same time. A request leaving the round unit before
// its last round is fed straight back into it, tagged with its round
// number, its key and a caller tag; after its last round the key and c_r
// are added and it leaves on the output.
//
// Batch control: when the cipher is empty the first accepted request opens
// an admission window of BATCH_P cycles. Requests offered in that window are
// accepted (one per cycle, at most BATCH_P); then in_ready stays low until
// every request of the batch has left. Because all requests of a batch enter
// within 13 cycles, each one keeps its own slot of the exponentiator's
// 13-stage loop from round to round (a round is 53 = 4 x 13 + 1 cycles, so
// the whole batch shifts by one slot per round) and a fed-back request never
// finds the round unit busy. An assertion checks that.
//
// Interface: in_valid/in_ready with x, k and a TAG_W-bit tag; out_valid is a
// one-cycle pulse with y, the request's key and its tag, no back-pressure.
// Results of a batch leave in arrival order. busy is high while requests are
// in flight.
//
// Timing: every request leaves 91 x 53 = 4823 cycles after it was accepted
// (91 x 40 = 3640 with NUM_MULT = 2); a full batch of 13 is done 12 cycles
// later. These totals are the paper's; the window rule, handshake and the
// combinational final addition at the output are this design's own.
//
// Lint note: rst_n is an asynchronous reset for the flops and is also read
// synchronously by the checking assertion's disable condition; the tools
// report this mixed use, which is intended.
module mimc_cipher
  import amaze_pkg::*;
#(
  parameter int unsigned MODMUL    = 0,
  parameter int unsigned NUM_MULT  = 1,
  parameter int unsigned CHUNK     = 27,
  parameter int unsigned ROUNDS_P  = ROUNDS,
  parameter int unsigned BATCH_P   = BATCH,
  parameter int unsigned TAG_W     = 4,
  parameter string       INIT_FILE = "rtl/mimc_constants.hex"
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  felem_t           in_x,
  input  felem_t           in_k,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output felem_t           out_y,
  output felem_t           out_k,
  output logic [TAG_W-1:0] out_tag,
  output logic             busy
);

  localparam int unsigned RW = $clog2(ROUNDS_P + 1);   // round index width
  localparam int unsigned CW = $clog2(BATCH_P + 1);    // batch counter width

  typedef struct packed {
    felem_t           k;
    logic [RW-1:0]    rnd;
    logic [TAG_W-1:0] tag;
  } side_t;

  localparam int unsigned SIDE_W = $bits(side_t);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RUN} state_t;

  state_t        state;
  logic [CW-1:0] win_cnt;     // cycles since the window opened
  logic [CW-1:0] inflight;    // requests inside the cipher

  // ---- round unit and its feedback -----------------------------------------
  logic              r_in_valid, r_in_ready, r_out_valid;
  felem_t            r_in_x, r_out_y, c_cur, c_fin;
  side_t             r_in_side, r_out_side;
  logic [SIDE_W-1:0] r_out_side_bits;
  logic              fb, last_done, accept;

  assign r_out_side = side_t'(r_out_side_bits);
  assign last_done  = r_out_valid && (r_out_side.rnd == RW'(ROUNDS_P - 1));
  assign fb         = r_out_valid && !last_done;

  assign in_ready = !fb && r_in_ready &&
                    ((state == S_IDLE) || (state == S_LOAD && win_cnt < CW'(BATCH_P)));
  assign accept   = in_valid && in_ready;

  always_comb begin
    if (fb) begin
      r_in_valid    = 1'b1;
      r_in_x        = r_out_y;
      r_in_side     = r_out_side;
      r_in_side.rnd = r_out_side.rnd + RW'(1);
    end else begin
      r_in_valid    = accept;
      r_in_x        = in_x;
      r_in_side.k   = in_k;
      r_in_side.rnd = '0;
      r_in_side.tag = in_tag;
    end
  end

  mimc_round_constants #(.ROUNDS_P(ROUNDS_P), .INIT_FILE(INIT_FILE)) u_rc (
    .idx(r_in_side.rnd), .c(c_cur), .c_final(c_fin)
  );

  mimc_round #(.MODMUL(MODMUL), .NUM_MULT(NUM_MULT), .SB_W(SIDE_W), .CHUNK(CHUNK)) u_round (
    .clk(clk), .rst_n(rst_n),
    .in_valid(r_in_valid), .in_ready(r_in_ready),
    .in_x(r_in_x), .in_k(r_in_side.k), .in_c(c_cur), .in_sb(SIDE_W'(r_in_side)),
    .out_valid(r_out_valid), .out_y(r_out_y), .out_sb(r_out_side_bits)
  );

  // ---- output: last key and constant addition ------------------------------
  mod_add3 u_final (.x(r_out_y), .k(r_out_side.k), .c(c_fin), .s(out_y));
  assign out_valid = last_done;
  assign out_k     = r_out_side.k;
  assign out_tag   = r_out_side.tag;
  assign busy      = (inflight != '0);

  // ---- batch controller ----------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      win_cnt  <= '0;
      inflight <= '0;
    end else begin
      inflight <= inflight + CW'(accept) - CW'(last_done);
      unique case (state)
        S_IDLE: if (accept) begin
          state   <= (BATCH_P == 1) ? S_RUN : S_LOAD;
          win_cnt <= CW'(1);
        end
        S_LOAD: begin
          win_cnt <= win_cnt + CW'(1);
          if (win_cnt + CW'(1) >= CW'(BATCH_P)) state <= S_RUN;
        end
        default: if (inflight == '0) state <= S_IDLE;
      endcase
    end
  end

  // a request coming back from a round must always find the round unit free
  assert property (@(posedge clk) disable iff (!rst_n) fb |-> r_in_ready)
    else $error("mimc_cipher: fed-back request blocked");

endmodule
