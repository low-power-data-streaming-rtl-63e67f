// tb_bf16_add: self-checking test of the Bfloat16 adder against the
// double-precision reference of bf16_ref_pkg. Directed cases cover signed
// zeros, exact cancellation, infinities, NaN, overflow, tiny results and a
// rounding tie; random cases cover the whole encoding space, a moderate
// exponent range, and near-cancellation (operands of opposite sign and
// close exponents), where normalisation shifts are largest.
module tb_bf16_add;
  import lpsa_pkg::*;
  import bf16_ref_pkg::*;

  bf16_t a, b, s;
  int checks = 0, failures = 0;

  bf16_add dut (.a(a), .b(b), .s(s));

  task automatic check(logic [15:0] x, logic [15:0] y);
    logic [15:0] exp_s;
    a = x;
    b = y;
    #1;
    exp_s = ref_add(x, y);
    checks++;
    if (s !== exp_s) begin
      failures++;
      if (failures < 10) $display("FAIL add %h + %h = %h, expected %h", x, y, s, exp_s);
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
    logic [15:0] x, y;
    check(16'h3F80, 16'h3F80);   // 1 + 1
    check(16'h3F80, 16'hBF80);   // 1 - 1 = +0
    check(16'h8000, 16'h8000);   // -0 + -0 = -0
    check(16'h8000, 16'h0000);   // -0 + +0 = +0
    check(16'h7F80, 16'hFF80);   // inf - inf = NaN
    check(16'h7F80, 16'h3F80);   // inf
    check(16'h7F7F, 16'h7F7F);   // overflow
    check(16'h0081, 16'h8080);   // result below normal range
    check(16'h3F80, 16'h3B80);   // 1 + 2^-8: tie, round to even
    check(16'h3F81, 16'h3B80);   // tie, round up
    check(16'h3F80, 16'h0080);   // far-apart exponents
    for (int i = 0; i < 20000; i++) check(16'($urandom), 16'($urandom));
    for (int i = 0; i < 20000; i++) check(rand_bf16_mid(), rand_bf16_mid());
    for (int i = 0; i < 20000; i++) begin
      x = rand_bf16_mid();
      y = x ^ 16'h8000;
      y[14:7] = 8'(int'(x[14:7]) + int'($urandom % 3) - 1);
      y[6:0]  = 7'($urandom);
      check(x, y);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
