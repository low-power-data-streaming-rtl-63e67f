// bf16_ref_pkg: reference Bfloat16 arithmetic for the testbenches, computed
// through IEEE double precision, independently of the RTL operators.
//
// A Bfloat16 value converts exactly to a double. Products of two Bfloat16
// values are exact in double; sums are rounded once to 53 bits, and a second
// rounding from 53 to 8 significand bits gives the same result as a direct
// rounding because 53 >= 2*8 + 2. to_bf16 rounds to nearest even at an
// unbounded exponent and then flushes results below the normal range to a
// signed zero, the convention the RTL documents. Subnormal inputs read as
// signed zero; every NaN becomes 0x7FC0.
package bf16_ref_pkg;

  function automatic real to_real(logic [15:0] x);
    logic [63:0] d;
    if (x[14:7] == 8'h00) begin
      d = {x[15], 63'd0};
    end else if (x[14:7] == 8'hFF) begin
      d = {x[15], 11'h7FF, (x[6:0] != 0), 51'd0};
    end else begin
      d = {x[15], 11'(int'(x[14:7]) - 127 + 1023), x[6:0], 45'd0};
    end
    return $bitstoreal(d);
  endfunction

  function automatic logic [15:0] to_bf16(real r);
    logic [63:0] d;
    logic [52:0] sig;
    logic [8:0]  s8;
    logic        g, st;
    int          e;
    d = $realtobits(r);
    if (d[62:52] == 11'h7FF) return (d[51:0] != 0) ? 16'h7FC0 : {d[63], 8'hFF, 7'h00};
    if (d[62:52] == 11'h000) return {d[63], 15'd0};
    sig = {1'b1, d[51:0]};
    s8  = {1'b0, sig[52:45]};
    g   = sig[44];
    st  = |sig[43:0];
    e   = int'(d[62:52]) - 1023 + 127;
    if (g && (st || s8[0])) s8 = s8 + 9'd1;
    if (s8[8]) begin
      s8 = s8 >> 1;
      e  = e + 1;
    end
    if (e <= 0)   return {d[63], 15'd0};
    if (e >= 255) return {d[63], 8'hFF, 7'h00};
    return {d[63], 8'(e), s8[6:0]};
  endfunction

  function automatic logic [15:0] ref_mul(logic [15:0] a, logic [15:0] b);
    return to_bf16(to_real(a) * to_real(b));
  endfunction

  function automatic logic [15:0] ref_add(logic [15:0] a, logic [15:0] b);
    return to_bf16(to_real(a) + to_real(b));
  endfunction

  // Random Bfloat16 in a moderate range (exponent 100..150), either sign.
  function automatic logic [15:0] rand_bf16_mid();
    logic [15:0] x;
    x = 16'($urandom);
    x[14:7] = 8'(100 + ($urandom % 51));
    return x;
  endfunction

endpackage
