// Self-checking testbench of mod_add3: random and corner operands (0, 1,
// p-1), each sum compared with (x + k + c) % p computed at full width.
module tb_mod_add3;
  import amaze_pkg::*;

  felem_t x, k, c, s;
  mod_add3 dut (.*);

  int checks = 0, failures = 0;

  function automatic felem_t rnd();
    logic [255:0] r;
    for (int i = 0; i < 8; i++) r[32*i +: 32] = $urandom;
    return felem_t'(r % {2'b00, P_MOD});
  endfunction

  initial begin
    for (int n = 0; n < 5000; n++) begin
      logic [FIELD_W+1:0] e;
      x = rnd(); k = rnd(); c = rnd();
      if (n % 7 == 0) x = P_MOD - 1;
      if (n % 5 == 0) k = P_MOD - 1;
      if (n % 11 == 0) c = (n % 2) ? P_MOD - 1 : '0;
      if (n == 1) begin x = '0; k = '0; c = '0; end
      if (n == 2) begin x = P_MOD - 1; k = 254'd1; c = '0; end
      #1;
      e = ({2'b00, x} + {2'b00, k} + {2'b00, c}) % {2'b00, P_MOD};
      checks++;
      if (s !== e[FIELD_W-1:0]) begin
        failures++;
        if (failures < 5) $display("MISMATCH %h + %h + %h = %h, exp %h", x, k, c, s, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
