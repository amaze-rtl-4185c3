// Non-pipelined x^7 mod p on Russian-peasant multipliers, one request at a
// time (the DSP-free configuration).
//
// The same multiplication schedules as modexp7 are run, but on iterative
// shift-and-add multipliers that each need 255 cycles per product:
//   NUM_MULT = 2: x^2 = x*x; then x^4 = x^2*x^2 and x^3 = x^2*x side by
//                 side; then x^7 = x^4*x^3 (three products in sequence);
//   NUM_MULT = 1: x^2, x^4 = x^2*x^2, x^6 = x^4*x^2, x^7 = x^6*x (four).
// A small controller starts the multiplier(s) for each pass and collects the
// results.
//
// Interface: in_ready is high while no request is being served; out_valid is
// a one-cycle pulse with the result and the request's sideband.
// Timing: PASSES x 256 + 1 cycles from the accepting edge to out_valid
// (each pass: one start cycle and the multiplier's 255; one output cycle):
// 769 cycles with NUM_MULT = 2.
//
// From the paper: the Russian-peasant multiplier, two of them working in
// parallel for x^7, and that this configuration serves one request at a
// time. The controller and its cycle counts are this design's own; the
// paper reports 72,028 cycles for a whole 91-round cipher, which this
// design does not reproduce exactly (91 x (1 + 769) = 70,070 here).
//
// Lint note: the multipliers' busy outputs and the second multiplier's done
// are not read; both multipliers start together and take the same fixed
// time, so the first one's done paces the controller.
module modexp7_serial
  import amaze_pkg::*;
#(
  parameter int unsigned NUM_MULT = 2,
  parameter int unsigned SB_W     = 1
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

  typedef enum logic [1:0] {S_IDLE, S_START, S_WAIT} state_t;

  state_t          state;
  logic [1:0]      pass;
  felem_t          x_q, x2, a_a, a_b, b_b;
  logic [SB_W-1:0] sb_q;
  logic            start, a_busy, a_done, b_busy, b_done;
  felem_t          a_y, b_y;

  assign in_ready = (state == S_IDLE);
  assign start    = (state == S_START);

  peasant_modmul u_a (.clk(clk), .rst_n(rst_n), .start(start), .a(a_a), .b(a_b),
                      .busy(a_busy), .done(a_done), .y(a_y));

  generate
    if (NUM_MULT == 2) begin : g_b
      peasant_modmul u_b (.clk(clk), .rst_n(rst_n), .start(start), .a(a_a), .b(b_b),
                          .busy(b_busy), .done(b_done), .y(b_y));
    end else begin : g_no_b
      assign b_busy = 1'b0;
      assign b_done = 1'b0;
      assign b_y    = '0;
    end
  endgenerate

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      pass      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        S_IDLE:  if (in_valid) begin state <= S_START; pass <= '0; end
        S_START: state <= S_WAIT;
        default: if (a_done) begin
          if (pass == LAST_PASS) begin
            state     <= S_IDLE;
            out_valid <= 1'b1;
          end else begin
            state <= S_START;
            pass  <= pass + 2'd1;
          end
        end
      endcase
    end
  end

  // operands of the next pass
  always_ff @(posedge clk) begin
    if (state == S_IDLE && in_valid) begin
      x_q  <= in_x;
      sb_q <= in_sb;
      a_a  <= in_x;
      a_b  <= in_x;
    end else if (state == S_WAIT && a_done) begin
      unique case (pass)
        2'd0: begin
          x2  <= a_y;
          a_a <= a_y;
          a_b <= a_y;              // x^4 = x^2 * x^2
          b_b <= x_q;              // x^3 = x^2 * x
        end
        2'd1: begin
          a_a <= a_y;              // x^4
          a_b <= (NUM_MULT == 1) ? x2 : b_y;   // x^2 or x^3
        end
        default: begin
          a_a <= a_y;              // x^6
          a_b <= x_q;
        end
      endcase
      out_y <= a_y;
    end
  end

  assign out_sb = sb_q;

endmodule
