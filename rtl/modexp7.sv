// Pipelined x^7 mod p by repeated squaring, 13 requests in flight.
//
// NUM_MULT = 1 (the main configuration): one Barrett multiplier is used four
// times per request,
//   pass 0: x^2 = x * x,  pass 1: x^4 = x^2 * x^2,
//   pass 2: x^6 = x^4 * x^2,  pass 3: x^7 = x^6 * x.
// NUM_MULT = 2: a second multiplier works beside the first in pass 1,
//   pass 0: x^2 = x * x,  pass 1: x^4 = x^2 * x^2 and x^3 = x^2 * x,
//   pass 2: x^7 = x^4 * x^3.
//
// How it works: the multiplier (12 cycles) and one transfer register form a
// loop of 13 stages. A request travels round this loop once per pass, with
// x, the saved square x^2 and a pass counter in the multiplier's sideband.
// When a request reaches the transfer register it either leaves (last pass)
// or is fed back into the multiplier with the operands of its next pass. A
// fed-back request has priority over a new one, so in_ready is low exactly in
// the cycles where the loop stage at the multiplier input is taken. Started
// from empty, the unit therefore takes 13 requests in 13 consecutive cycles,
// then refuses new ones until the first result leaves; each request's slot
// is freed in the cycle its result leaves and can be taken in that cycle.
//
// Timing: latency 13 x 4 = 52 cycles (NUM_MULT = 1) or 13 x 3 = 39 cycles
// (NUM_MULT = 2) from the accepting clock edge to the one after which
// out_valid is high. Results leave in the order requests arrived. There is
// no output back-pressure: out_valid is a one-cycle pulse.
//
// From the paper: both multiplication schedules, the 13-cycle pass (12-cycle
// multiplier plus a transfer cycle), the 52 and 39 cycle latencies and the
// admission of new requests only in the first 13 cycles of each period. The
// valid/ready handshake and the priority rule are this design's own.
//
// Lint note: with NUM_MULT = 1 the operand mul_c of the second multiplier is
// computed but has no reader, because that multiplier is not instantiated.
module modexp7
  import amaze_pkg::*;
#(
  parameter int unsigned NUM_MULT = 1,  // 1: four passes, 2: three passes
  parameter int unsigned SB_W     = 1,  // caller sideband carried with x
  parameter int unsigned CHUNK    = 27  // multiplier chunk width
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  felem_t          in_x,
  input  logic [SB_W-1:0] in_sb,
  output logic            out_valid,
  output felem_t          out_y,
  output logic [SB_W-1:0] out_sb
);

  localparam logic [1:0] LAST_PASS = (NUM_MULT == 1) ? 2'd3 : 2'd2;

  // sideband carried through the multiplier
  typedef struct packed {
    logic [1:0]      pass;
    felem_t          x;      // the base x
    felem_t          x2;     // x^2 once pass 0 is done
    logic [SB_W-1:0] usr;
  } tag_t;

  localparam int unsigned TAG_W = $bits(tag_t);

  // transfer register at the loop end
  logic   rec_valid;
  felem_t rec_y;       // result of multiplier A
  felem_t rec_y3;      // result of multiplier B (NUM_MULT = 2)
  tag_t   rec_tag;

  logic   recirc;
  assign recirc = rec_valid && (rec_tag.pass != LAST_PASS);

  // ---- operand selection at the loop entry ---------------------------------
  logic   mul_valid;
  felem_t mul_a, mul_b, mul_c;   // A = a * b, B = a * c (pass 1, NUM_MULT = 2)
  tag_t   mul_tag;

  assign in_ready = !recirc;

  always_comb begin
    mul_tag = rec_tag;
    mul_a   = rec_y;
    mul_b   = rec_y;
    mul_c   = rec_tag.x;
    if (recirc) begin
      mul_valid    = 1'b1;
      mul_tag.pass = rec_tag.pass + 2'd1;
      unique case (rec_tag.pass)
        2'd0: begin                       // x^2 done: square it
          mul_tag.x2 = rec_y;
          mul_a = rec_y;
          mul_b = rec_y;
          mul_c = rec_tag.x;              // x^3 = x^2 * x on B
        end
        2'd1: begin
          mul_a = rec_y;                  // x^4
          mul_b = (NUM_MULT == 1) ? rec_tag.x2 : rec_y3;   // x^2 or x^3
        end
        default: begin                    // pass 2 of NUM_MULT = 1
          mul_a = rec_y;                  // x^6
          mul_b = rec_tag.x;
        end
      endcase
    end else begin
      mul_valid    = in_valid;
      mul_tag.pass = 2'd0;
      mul_tag.x    = in_x;
      mul_tag.x2   = '0;
      mul_tag.usr  = in_sb;
      mul_a        = in_x;
      mul_b        = in_x;
      mul_c        = in_x;
    end
  end

  // ---- multiplier A --------------------------------------------------------
  logic           ma_valid;
  felem_t         ma_y;
  logic [TAG_W-1:0] ma_tag;

  barrett_modmul #(.SB_W(TAG_W), .CHUNK(CHUNK)) u_mul_a (
    .clk(clk), .rst_n(rst_n),
    .in_valid(mul_valid), .in_a(mul_a), .in_b(mul_b), .in_sb(TAG_W'(mul_tag)),
    .out_valid(ma_valid), .out_y(ma_y), .out_sb(ma_tag)
  );

  // ---- multiplier B, only with NUM_MULT = 2 --------------------------------
  felem_t mb_y;
  generate
    if (NUM_MULT == 2) begin : g_mul_b
      logic mb_valid_unused;
      logic mb_sb_unused;
      barrett_modmul #(.SB_W(1), .CHUNK(CHUNK)) u_mul_b (
        .clk(clk), .rst_n(rst_n),
        .in_valid(mul_valid), .in_a(mul_a), .in_b(mul_c), .in_sb(1'b0),
        .out_valid(mb_valid_unused), .out_y(mb_y), .out_sb(mb_sb_unused)
      );
    end else begin : g_no_mul_b
      assign mb_y = '0;
    end
  endgenerate

  // ---- transfer register ---------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rec_valid <= 1'b0;
    else        rec_valid <= ma_valid;
  end
  always_ff @(posedge clk) begin
    rec_y   <= ma_y;
    rec_y3  <= mb_y;
    rec_tag <= tag_t'(ma_tag);
  end

  assign out_valid = rec_valid && (rec_tag.pass == LAST_PASS);
  assign out_y     = rec_y;
  assign out_sb    = rec_tag.usr;

endmodule
