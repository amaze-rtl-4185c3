// Self-checking testbench of int_mult: a new random operand pair every
// cycle (plus corner values), each product compared with a full-width
// product formed by the `*` operator exactly 3 cycles later. A second
// instance checks the 255 x 255 shape used by the Barrett reduction, a
// third the 16-bit chunking used for devices with smaller DSPs.
module tb_int_mult;
  localparam int unsigned AW = 254, BW = 254, LAT = 3, N = 400;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [AW-1:0] x;
  logic [BW-1:0] y;
  logic [AW+BW-1:0] p;
  logic [254:0] x5, y5;
  logic [509:0] p5;
  logic [507:0] p16;

  int_mult #(.AW(AW), .BW(BW)) dut (.clk(clk), .x(x), .y(y), .p(p));
  int_mult #(.AW(255), .BW(255)) dut5 (.clk(clk), .x(x5), .y(y5), .p(p5));
  int_mult #(.AW(254), .BW(254), .CHUNK(16)) dut16 (.clk(clk), .x(x), .y(y), .p(p16));

  int checks = 0, failures = 0;
  logic [AW+BW-1:0] exp_q [$];
  logic [509:0]     exp5_q [$];

  function automatic logic [255:0] rnd256();
    logic [255:0] r;
    for (int i = 0; i < 8; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    for (int n = 0; n < N + LAT; n++) begin
      if (n < 3) begin
        x = (n == 0) ? '1 : (n == 1) ? '0 : AW'(1) << 126;
        y = (n == 0) ? '1 : (n == 1) ? '1 : BW'(1) << 27;
      end else begin
        x = AW'(rnd256()); y = BW'(rnd256());
      end
      x5 = 255'(rnd256()); y5 = (n == 0) ? '1 : 255'(rnd256());
      if (n == 0) x5 = '1;
      exp_q.push_back((AW+BW)'(x) * (AW+BW)'(y));
      exp5_q.push_back(510'(x5) * 510'(y5));
      @(posedge clk); #1;
      if (n >= LAT - 1) begin
        logic [AW+BW-1:0] e;
        logic [509:0] e5;
        e = exp_q.pop_front(); e5 = exp5_q.pop_front();
        checks += 3;
        if (p16 !== e) begin
          failures++;
          if (failures < 5) $display("MISMATCH 16-bit chunks n=%0d", n);
        end
        if (p !== e) begin
          failures++;
          if (failures < 5) $display("MISMATCH 254x254 n=%0d got %h exp %h", n, p, e);
        end
        if (p5 !== e5) begin
          failures++;
          if (failures < 5) $display("MISMATCH 255x255 n=%0d", n);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
