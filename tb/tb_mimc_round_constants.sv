// Self-checking testbench of mimc_round_constants: every entry read
// through the round port must match the table, lie below p, and the
// published anchors must hold: c_0 = 0, c_91 = 0 on the final port, and
// c_1, c_2 equal to SHA3-256 chain values reduced mod p (written out here).
module tb_mimc_round_constants;
  import amaze_pkg::*;

  logic [6:0] idx;
  felem_t c, c_final;
  mimc_round_constants dut (.*);

  felem_t table_q [ROUNDS+1];
  int checks = 0, failures = 0;

  localparam felem_t C1 = 254'h1571ae79a73cc0f7e4c88b89d2ddc87921d759cafedd3a3a197144d47d816c44;
  localparam felem_t C2 = 254'h19dff01264a4e2505c77568c277f114f880b55737cf66658d90ba8e4ff6a2d0c;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    $readmemh("rtl/mimc_constants.hex", table_q);
    for (int i = 0; i <= ROUNDS; i++) begin
      idx = 7'(i); #1;
      chk(c === table_q[i], $sformatf("entry %0d", i));
      chk(c < P_MOD, $sformatf("entry %0d below p", i));
      if (i == 0) chk(c === '0, "c_0 = 0");
      if (i == 1) chk(c === C1, "c_1");
      if (i == 2) chk(c === C2, "c_2");
    end
    chk(c_final === '0, "c_final = 0");
    idx = 7'd100; #1;
    chk(c === '0, "out-of-range index reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
