// Three-operand modular adder, s = (x + k + c) mod p, purely combinational.
//
// This is the key and round-constant addition in front of every cipher
// round, and the final additions of the cipher (y + k + c_r) and of the
// hash (E + y_{i-1} + x_i). All operands must be below p. Two field
// additions are chained, each an add followed by one conditional
// subtraction of p, so the result is again below p.
//
// The paper names the block ("modular addition") and says "addition in a
// Galois field"; the two-step structure is this design's own, and the
// caller registers the result (one cycle in the cipher round).
module mod_add3
  import amaze_pkg::*;
(
  input  felem_t x,
  input  felem_t k,
  input  felem_t c,
  output felem_t s
);

  assign s = add_mod(add_mod(x, k), c);

endmodule
