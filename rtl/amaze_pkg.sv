// Shared constants and types of the MiMC-p/p accelerator.
//
// The field is the scalar field of the BN254 curve: p is a 254-bit prime,
// every field element is a 254-bit unsigned integer below p. The Barrett
// constant Z = floor(2^(2N) / p) with N = ceil(log2(p-1)) = 254 is fixed here
// rather than computed, because it is needed as a synthesis-time constant.
// The cipher uses the exponent d = 7 and 91 rounds, and the pipelined design
// services a batch of 13 independent requests; these numbers are the paper's.
// The field adder below (add_mod) is this design's own helper: operands
// below p, one conditional subtraction.
//
// Lint note: a module that uses only part of this package makes the tools
// report the rest (for example ROUNDS or BARRETT_Z) as unused parameters.
package amaze_pkg;

  localparam int unsigned FIELD_W = 254;               // width of a field element
  localparam int unsigned BARRETT_N = 254;             // n = ceil(log2(p-1))
  localparam int unsigned ROUNDS = 91;                 // cipher rounds r
  localparam int unsigned BATCH = 13;                  // requests in flight at once

  typedef logic [FIELD_W-1:0] felem_t;

  // p = 21888242871839275222246405745257275088548364400416034343698204186575808495617
  localparam felem_t P_MOD =
    254'h30644e72e131a029b85045b68181585d2833e84879b9709143e1f593f0000001;

  // Z = floor(2^508 / p), 255 bits wide.
  localparam logic [BARRETT_N:0] BARRETT_Z =
    255'h54a47462623a04a7ab074a58680730147144852009e880ae620703a6be1de925;

  // (a + b) mod p for a, b < p.
  function automatic felem_t add_mod(input felem_t a, input felem_t b);
    logic [FIELD_W:0] s;
    felem_t           d;
    s = {1'b0, a} + {1'b0, b};
    d = s[FIELD_W-1:0] - P_MOD;     // s - p fits in FIELD_W bits when s >= p
    return (s >= {1'b0, P_MOD}) ? d : s[FIELD_W-1:0];
  endfunction

endpackage
