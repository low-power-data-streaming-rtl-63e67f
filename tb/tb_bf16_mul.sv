// tb_bf16_mul: self-checking test of the Bfloat16 multiplier against the
// double-precision reference of bf16_ref_pkg. Directed cases cover signed
// zeros, subnormal inputs, infinities, NaN, overflow, underflow and a
// rounding carry; then random operands over the whole encoding space and
// over a moderate exponent range. The multiplier is combinational: each
// operand pair is applied, then checked after a 1 ns settle.
module tb_bf16_mul;
  import lpsa_pkg::*;
  import bf16_ref_pkg::*;

  bf16_t a, b, p;
  int checks = 0, failures = 0;

  bf16_mul dut (.a(a), .b(b), .p(p));

  task automatic check(logic [15:0] x, logic [15:0] y);
    logic [15:0] exp_p;
    a = x;
    b = y;
    #1;
    exp_p = ref_mul(x, y);
    checks++;
    if (p !== exp_p) begin
      failures++;
      if (failures < 10) $display("FAIL mul %h * %h = %h, expected %h", x, y, p, exp_p);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'h3F80, 16'h3F80);   // 1 * 1
    check(16'h4000, 16'hC040);   // 2 * -3
    check(16'h0000, 16'hBF80);   // +0 * -1 = -0
    check(16'h0001, 16'h3F80);   // subnormal reads as zero
    check(16'h7F80, 16'h4000);   // inf
    check(16'h7F80, 16'h0000);   // inf * 0 = NaN
    check(16'h7FC1, 16'h3F80);   // NaN
    check(16'h7F00, 16'h7F00);   // overflow
    check(16'h0080, 16'h0080);   // underflow
    check(16'h3FFF, 16'h3FFF);   // rounding carry into exponent
    check(16'h3FC0, 16'h3FC0);   // 1.5*1.5 exact
    for (int i = 0; i < 20000; i++) check(16'($urandom), 16'($urandom));
    for (int i = 0; i < 20000; i++) check(rand_bf16_mid(), rand_bf16_mid());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
