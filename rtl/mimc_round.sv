// One MiMC-p/p cipher round, y = (x + k + c)^7 mod p, pipelined.
//
// A single register stage adds the key k and the round constant c to the
// round input (mod_add3), then modexp7 raises the sum to the 7th power. The
// unit holds up to 13 requests (the exponentiator's loop slots) plus the one
// in its add register, and returns results in arrival order.
//
// Interface: valid/ready on the input; the add register holds its request
// while the exponentiator refuses it, and in_ready is high when that
// register is empty or being emptied. out_valid is a one-cycle pulse with no
// back-pressure. A sideband of SB_W bits travels with each request.
//
// MODMUL selects the exponentiator: 0 the pipelined Barrett one (modexp7),
// 1 the one-at-a-time Russian-peasant one (modexp7_serial).
//
// Timing with MODMUL = 0: 1 + 52 = 53 cycles with NUM_MULT = 1 (1 + 39 =
// 40 with NUM_MULT = 2) from acceptance to result. The paper gives the 52/39
// cycle exponentiations and 4823 (3640) cycles for 91 rounds, i.e. 53 (40)
// cycles per round; spending the extra cycle on the key/constant addition is
// this design's reading of those numbers.
module mimc_round
  import amaze_pkg::*;
#(
  parameter int unsigned MODMUL   = 0,   // 0: pipelined Barrett, 1: Russian peasant
  parameter int unsigned NUM_MULT = 1,
  parameter int unsigned SB_W     = 1,
  parameter int unsigned CHUNK    = 27
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  felem_t          in_x,
  input  felem_t          in_k,
  input  felem_t          in_c,
  input  logic [SB_W-1:0] in_sb,
  output logic            out_valid,
  output felem_t          out_y,
  output logic [SB_W-1:0] out_sb
);

  felem_t          sum;
  logic            s_valid;
  felem_t          s_x;
  logic [SB_W-1:0] s_sb;
  logic            exp_ready;

  mod_add3 u_add (.x(in_x), .k(in_k), .c(in_c), .s(sum));

  assign in_ready = !s_valid || exp_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        s_valid <= 1'b0;
    else if (in_ready) s_valid <= in_valid;
  end
  always_ff @(posedge clk) begin
    if (in_ready) begin
      s_x  <= sum;
      s_sb <= in_sb;
    end
  end

  generate
    if (MODMUL == 0) begin : g_barrett
      modexp7 #(.NUM_MULT(NUM_MULT), .SB_W(SB_W), .CHUNK(CHUNK)) u_exp (
        .clk(clk), .rst_n(rst_n),
        .in_valid(s_valid), .in_ready(exp_ready), .in_x(s_x), .in_sb(s_sb),
        .out_valid(out_valid), .out_y(out_y), .out_sb(out_sb)
      );
    end else begin : g_peasant
      modexp7_serial #(.NUM_MULT(NUM_MULT), .SB_W(SB_W)) u_exp (
        .clk(clk), .rst_n(rst_n),
        .in_valid(s_valid), .in_ready(exp_ready), .in_x(s_x), .in_sb(s_sb),
        .out_valid(out_valid), .out_y(out_y), .out_sb(out_sb)
      );
    end
  endgenerate

endmodule
