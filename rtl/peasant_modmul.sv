// Russian-peasant (shift-and-add) modular multiplier, y = a * b mod p,
// one bit of b per clock cycle and no hardware multiplier at all.
//
// Each of the N = 254 iterations looks at the lowest bit of b: if it is set,
// the current a is added to the accumulator y; y is reduced by one
// conditional subtraction of p; a is doubled and reduced the same way; b is
// shifted right. After N iterations y = a * b mod p. Only adders,
// comparators and shifters are needed, so the unit suits devices without
// DSP blocks, at the price of N cycles per product.
//
// Interface: start is honoured while busy is low and loads a and b (both
// below p); done pulses for one cycle with y valid from then until the next
// start. Timing: done is high N + 1 = 255 cycles after the start edge
// (one load cycle, then N iteration cycles).
//
// From the paper: the algorithm and the 254 cycles per product. The
// start/done handshake, the load cycle, and reducing when y >= p (the
// paper's listing writes y > p, which would let y = p through) are this
// design's own.
module peasant_modmul
  import amaze_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  felem_t a,
  input  felem_t b,
  output logic   busy,
  output logic   done,
  output felem_t y
);

  localparam int unsigned N  = BARRETT_N;      // bits of a field element
  localparam int unsigned CW = $clog2(N);

  felem_t        x1, x2;
  logic [CW-1:0] cnt;
  logic [FIELD_W:0] y_n, u_n;

  // one iteration of the shift-and-add loop
  always_comb begin
    y_n = {1'b0, y} + (x2[0] ? {1'b0, x1} : '0);
    y_n = (y_n >= {1'b0, P_MOD}) ? y_n - {1'b0, P_MOD} : y_n;
    u_n = {x1, 1'b0};
    u_n = (u_n >= {1'b0, P_MOD}) ? u_n - {1'b0, P_MOD} : u_n;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          cnt  <= '0;
        end
      end else begin
        cnt <= cnt + CW'(1);
        if (cnt == CW'(N - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!busy) begin
      if (start) begin
        x1 <= a;
        x2 <= b;
        y  <= '0;
      end
    end else begin
      y  <= y_n[FIELD_W-1:0];
      x1 <= u_n[FIELD_W-1:0];
      x2 <= x2 >> 1;
    end
  end

endmodule
