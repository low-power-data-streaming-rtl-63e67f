// bf16_mul: combinational Bfloat16 multiplier used inside each processing
// element.
//
// The paper builds its PEs from a vendor library's Bfloat16 operators and
// does not describe their insides, so this is a plain IEEE-style multiplier
// written for this design:
//   * the 8-bit significands (hidden one plus 7 fraction bits) are multiplied
//     into a 16-bit product, normalised by at most one place and rounded to
//     nearest, ties to even, using a guard bit and a sticky bit;
//   * subnormal inputs are read as zero and a result whose exponent is below
//     the normal range after rounding is flushed to a signed zero;
//   * overflow gives a signed infinity; NaN inputs and infinity times zero
//     give the quiet NaN 0x7FC0.
// Interface: a, b in, p out, no clock. Timing: one combinational path.
module bf16_mul
  import lpsa_pkg::*;
(
  input  bf16_t a,
  input  bf16_t b,
  output bf16_t p
);

  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan, sgn;
  logic [15:0] prod;
  logic [7:0]  sig;
  logic        guard, sticky, inc;
  logic [8:0]  rnd;
  logic signed [10:0] e;

  always_comb begin
    a_zero = (a.exp == '0);
    b_zero = (b.exp == '0);
    a_inf  = (a.exp == '1) && (a.man == '0);
    b_inf  = (b.exp == '1) && (b.man == '0);
    a_nan  = (a.exp == '1) && (a.man != '0);
    b_nan  = (b.exp == '1) && (b.man != '0);
    sgn    = a.sign ^ b.sign;

    prod = {1'b1, a.man} * {1'b1, b.man};
    e    = $signed({3'b000, a.exp}) + $signed({3'b000, b.exp}) - 11'sd127;
    if (prod[15]) begin
      sig    = prod[15:8];
      guard  = prod[7];
      sticky = |prod[6:0];
      e      = e + 11'sd1;
    end else begin
      sig    = prod[14:7];
      guard  = prod[6];
      sticky = |prod[5:0];
    end
    inc = guard & (sticky | sig[0]);
    rnd = {1'b0, sig} + {8'd0, inc};
    if (rnd[8]) begin
      sig = rnd[8:1];
      e   = e + 11'sd1;
    end else begin
      sig = rnd[7:0];
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      p = BF16_QNAN;
    end else if (a_inf || b_inf) begin
      p = '{sign: sgn, exp: '1, man: '0};
    end else if (a_zero || b_zero || e <= 11'sd0) begin
      p = '{sign: sgn, exp: '0, man: '0};
    end else if (e >= 11'sd255) begin
      p = '{sign: sgn, exp: '1, man: '0};
    end else begin
      p = '{sign: sgn, exp: e[7:0], man: sig[6:0]};
    end
  end

endmodule
