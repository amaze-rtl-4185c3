// Reference arithmetic for the testbenches, written without any of the
// hardware's algorithms: products are formed at full width and reduced with
// the `%` operator; the cipher and the hash follow their textbook
// definitions. The round constants are read from the same table the
// hardware ROM is initialised from.
package amaze_ref_pkg;
  import amaze_pkg::*;

  localparam string CONST_FILE = "rtl/mimc_constants.hex";

  function automatic felem_t ref_mul(input felem_t a, input felem_t b);
    logic [2*FIELD_W-1:0] w;
    w = {{FIELD_W{1'b0}}, a} * {{FIELD_W{1'b0}}, b};
    return felem_t'(w % {{FIELD_W{1'b0}}, P_MOD});
  endfunction

  function automatic felem_t ref_add(input felem_t a, input felem_t b);
    logic [FIELD_W:0] s;
    s = ({1'b0, a} + {1'b0, b}) % {1'b0, P_MOD};
    return s[FIELD_W-1:0];
  endfunction

  function automatic felem_t ref_pow7(input felem_t x);
    felem_t r;
    r = x;
    for (int i = 0; i < 6; i++) r = ref_mul(r, x);
    return r;
  endfunction

  // MiMC(x, k) with `rounds` rounds and constants c[0..rounds]
  function automatic felem_t ref_mimc(input felem_t x, input felem_t k,
                                      input felem_t c [], input int rounds);
    felem_t s;
    s = x;
    for (int i = 0; i < rounds; i++) s = ref_pow7(ref_add(ref_add(s, k), c[i]));
    return ref_add(ref_add(s, k), c[rounds]);
  endfunction

  // random field element: 256 random bits reduced mod p
  function automatic felem_t rand_fe();
    logic [255:0] r;
    for (int i = 0; i < 8; i++) r[32*i +: 32] = $urandom;
    return felem_t'(r % {2'b00, P_MOD});
  endfunction

endpackage
