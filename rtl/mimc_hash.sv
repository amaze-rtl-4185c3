// MiMC-p/p accelerator top: Miyaguchi-Preneel hash around the batch cipher,
// with a raw cipher mode.
//
// Hash of a message of field elements x_1 .. x_m (padding and the mapping of
// bytes to field elements are the host's job):
//   y_0 = 0,   y_i = MiMC(x_i, k = y_{i-1}) + y_{i-1} + x_i  mod p,   H = y_m
// Each block is one cipher request whose key is the previous chaining value.
//
// The top serves up to BATCH_P = 13 independent messages at once, one per
// "lane". The host sends one request per lane and batch:
//   req_mode = 1 (hash): req_x is block x_i of the lane's message;
//                req_first starts a new message (key y_0 = 0), otherwise the
//                key is the lane's stored chaining value; req_last marks the
//                final block, whose chaining value is returned as the digest.
//   req_mode = 0 (cipher): MiMC(req_x, req_k) is returned; lane state is
//                not touched.
// A lane is busy from the acceptance of its request until the cipher returns
// it; a second request for a busy lane is held off (req_ready low), which
// also keeps it out of the current batch. Per lane the top stores the
// chaining value and the block in flight (needed for the feed-forward
// addition).
//
// Interface: req_valid/req_ready; res_valid is a one-cycle pulse (no
// back-pressure) with the lane, the mode and the result: the digest after a
// hash request with req_last, the cipher output after a cipher request.
// Intermediate hash blocks produce no result.
//
// Timing: a result appears 4823 + 1 cycles after its request was accepted
// (the cipher's 91 x 53 cycles and this module's output register); 3640 + 1
// with NUM_MULT = 2.
//
// From the paper: the Miyaguchi-Preneel construction, the previous chaining
// value as cipher key and the block as cipher message. The lane scheme, the
// zero initial value, the request format and the cipher mode are this
// design's own.
//
// Lint note: rst_n is an asynchronous reset for the flops and is also read
// synchronously by the checking assertion's disable condition; the tools
// report this mixed use, which is intended.
module mimc_hash
  import amaze_pkg::*;
#(
  parameter int unsigned MODMUL    = 0,   // 0: pipelined Barrett, 1: Russian peasant
  parameter int unsigned NUM_MULT  = 1,   // multipliers per x^7 unit (1 or 2)
  parameter int unsigned CHUNK     = 27,  // DSP operand width (16 for smaller DSPs)
  parameter int unsigned ROUNDS_P  = ROUNDS,
  parameter string       INIT_FILE = "rtl/mimc_constants.hex"
) (
  input  logic       clk,
  input  logic       rst_n,
  // request
  input  logic       req_valid,
  output logic       req_ready,
  input  logic       req_mode,     // 1: hash block, 0: raw cipher
  input  logic [3:0] req_lane,     // 0 .. 12
  input  logic       req_first,
  input  logic       req_last,
  input  felem_t     req_x,
  input  felem_t     req_k,        // cipher key, cipher mode only
  // result
  output logic       res_valid,
  output logic       res_mode,
  output logic [3:0] res_lane,
  output felem_t     res_y,
  output logic       busy
);

  localparam int unsigned LANES = BATCH;

  typedef struct packed {
    logic       mode;
    logic       last;
    logic [3:0] lane;
  } tag_t;

  felem_t            chain [LANES];
  felem_t            blk   [LANES];
  logic [LANES-1:0]  lane_busy;

  logic   c_in_ready, c_out_valid, accept;
  felem_t c_key, c_out_y, c_out_k, mp_y;
  tag_t   c_in_tag, c_out_tag;
  logic [$bits(tag_t)-1:0] c_out_tag_bits;

  assign req_ready = c_in_ready && (req_lane < 4'(LANES)) && !lane_busy[req_lane];
  assign accept    = req_valid && req_ready;

  always_comb begin
    if (!req_mode)      c_key = req_k;
    else if (req_first) c_key = '0;
    else                c_key = chain[req_lane];
  end
  assign c_in_tag = '{mode: req_mode, last: req_last, lane: req_lane};

  mimc_cipher #(
    .MODMUL(MODMUL), .NUM_MULT(NUM_MULT), .CHUNK(CHUNK), .ROUNDS_P(ROUNDS_P),
    .BATCH_P((MODMUL == 0) ? BATCH : 1),
    .TAG_W($bits(tag_t)), .INIT_FILE(INIT_FILE)
  ) u_cipher (
    .clk(clk), .rst_n(rst_n),
    .in_valid(accept), .in_ready(c_in_ready),
    .in_x(req_x), .in_k(c_key), .in_tag(c_in_tag),
    .out_valid(c_out_valid), .out_y(c_out_y), .out_k(c_out_k),
    .out_tag(c_out_tag_bits), .busy(busy)
  );

  assign c_out_tag = tag_t'(c_out_tag_bits);

  // feed-forward: y_i = E + y_{i-1} + x_i
  mod_add3 u_ff (.x(c_out_y), .k(c_out_k), .c(blk[c_out_tag.lane]), .s(mp_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lane_busy <= '0;
      res_valid <= 1'b0;
    end else begin
      if (c_out_valid) lane_busy[c_out_tag.lane] <= 1'b0;
      if (accept)      lane_busy[req_lane]       <= 1'b1;
      res_valid <= c_out_valid && (!c_out_tag.mode || c_out_tag.last);
    end
  end

  always_ff @(posedge clk) begin
    if (accept && req_mode) blk[req_lane] <= req_x;
    if (c_out_valid && c_out_tag.mode) chain[c_out_tag.lane] <= mp_y;
    res_mode <= c_out_tag.mode;
    res_lane <= c_out_tag.lane;
    res_y    <= c_out_tag.mode ? mp_y : c_out_y;
  end

  // the host must name a lane that exists
  assert property (@(posedge clk) disable iff (!rst_n) req_valid |-> req_lane < 4'(LANES))
    else $error("mimc_hash: lane out of range");

endmodule
