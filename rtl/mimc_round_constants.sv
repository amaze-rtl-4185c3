// Round-constant ROM of the MiMC-p/p cipher: entries c_0 .. c_ROUNDS.
//
// Entry i (i < ROUNDS) is added together with the key before round i; entry
// ROUNDS is added with the key after the last round. The two read ports are
// combinational: `c` for the round about to start and `c_final` for the
// output addition.
//
// The paper says only that the constants are precomputed and publicly agreed
// upon, and gives no values. The contents are loaded from INIT_FILE, one
// 64-digit hexadecimal number per line. The file shipped with this design
// holds c_0 = 0 and c_ROUNDS = 0 (the usual MiMC convention: the first and
// the output additions add the key only) and, for 1 <= i < ROUNDS,
// c_i = H_i mod p with H_1 = SHA3-256(H_0), H_0 = SHA3-256("mimc"), and
// H_i = SHA3-256(H_{i-1}), each H read as a 256-bit big-endian integer.
// Applications that must match another MiMC implementation replace the file.
module mimc_round_constants
  import amaze_pkg::*;
#(
  parameter int unsigned ROUNDS_P  = ROUNDS,
  parameter string       INIT_FILE = "rtl/mimc_constants.hex"
) (
  input  logic [$clog2(ROUNDS_P+1)-1:0] idx,
  output felem_t                        c,
  output felem_t                        c_final
);

  felem_t rom [ROUNDS_P+1];

  initial $readmemh(INIT_FILE, rom);

  assign c       = (int'(idx) <= int'(ROUNDS_P)) ? rom[idx] : '0;
  assign c_final = rom[ROUNDS_P];

endmodule
