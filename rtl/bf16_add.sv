// bf16_add: combinational Bfloat16 adder used as the accumulator adder of
// each processing element.
//
// The paper takes its Bfloat16 operators from a vendor library and does not
// describe them; this adder is written for this design and follows the
// same number conventions as bf16_mul:
//   * operands are ordered by magnitude, the smaller significand is shifted
//     right into an 18-bit field (8 significand bits and 10 extra bits) and
//     every bit shifted out is ORed into the lowest bit (sticky);
//   * the sum or difference is normalised (one place right, or left by the
//     leading-zero count) and rounded to nearest, ties to even;
//   * subnormal inputs read as zero, results below the normal range after
//     rounding flush to a signed zero, overflow gives infinity, x + (-x) is
//     +0, NaN inputs and inf - inf give the quiet NaN 0x7FC0.
// Interface: a, b in, s out, no clock. Timing: one combinational path.
module bf16_add
  import lpsa_pkg::*;
(
  input  bf16_t a,
  input  bf16_t b,
  output bf16_t s
);

  localparam int unsigned XW = 10;           // extra alignment bits
  localparam int unsigned FW = 8 + XW;       // aligned field width

  bf16_t       larger, lesser;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan, sub;
  logic [7:0]  d;
  logic [FW-1:0] mb_full, mb_sh, lost_mask, ma, nrm;
  logic [FW:0] sum;
  logic        stk;
  logic [4:0]  lz;
  logic [7:0]  sig;
  logic        guard, sticky, inc;
  logic [8:0]  rnd;
  logic signed [10:0] e;

  always_comb begin
    lost_mask = '0;
    nrm       = '0;
    a_zero = (a.exp == '0);
    b_zero = (b.exp == '0);
    a_inf  = (a.exp == '1) && (a.man == '0);
    b_inf  = (b.exp == '1) && (b.man == '0);
    a_nan  = (a.exp == '1) && (a.man != '0);
    b_nan  = (b.exp == '1) && (b.man != '0);

    if ({a.exp, a.man} >= {b.exp, b.man}) begin
      larger = a;
      lesser = b;
    end else begin
      larger = b;
      lesser = a;
    end
    sub = larger.sign ^ lesser.sign;
    d   = larger.exp - lesser.exp;

    ma      = {1'b1, larger.man, {XW{1'b0}}};
    mb_full = {1'b1, lesser.man, {XW{1'b0}}};
    if (d >= 8'(FW)) begin
      mb_sh = '0;
      stk   = 1'b1;
    end else begin
      lost_mask = (FW'(1) << d) - FW'(1);
      mb_sh     = mb_full >> d;
      stk       = |(mb_full & lost_mask);
    end
    mb_sh[0] = mb_sh[0] | stk;

    sum = sub ? ({1'b0, ma} - {1'b0, mb_sh}) : ({1'b0, ma} + {1'b0, mb_sh});

    // Normalise so that the leading one sits in bit FW-1.
    e  = $signed({3'b000, larger.exp});
    lz = '0;
    if (sum[FW]) begin
      nrm = sum[FW:1];
      nrm[0] = nrm[0] | sum[0];
      e = e + 11'sd1;
    end else begin
      for (int i = 0; i < FW; i++) begin
        if (sum[i]) lz = 5'(FW - 1 - i);
      end
      nrm = sum[FW-1:0] << lz;
      e   = e - $signed({6'd0, lz});
    end

    sig    = nrm[FW-1 -: 8];
    guard  = nrm[XW-1];
    sticky = |nrm[XW-2:0];
    inc    = guard & (sticky | sig[0]);
    rnd    = {1'b0, sig} + {8'd0, inc};
    if (rnd[8]) begin
      sig = rnd[8:1];
      e   = e + 11'sd1;
    end else begin
      sig = rnd[7:0];
    end

    if (a_nan || b_nan || (a_inf && b_inf && sub)) begin
      s = BF16_QNAN;
    end else if (a_inf) begin
      s = '{sign: a.sign, exp: '1, man: '0};
    end else if (b_inf) begin
      s = '{sign: b.sign, exp: '1, man: '0};
    end else if (a_zero && b_zero) begin
      s = '{sign: a.sign & b.sign, exp: '0, man: '0};
    end else if (b_zero) begin
      s = a;
    end else if (a_zero) begin
      s = b;
    end else if (sum == '0) begin
      s = '0;
    end else if (e <= 11'sd0) begin
      s = '{sign: larger.sign, exp: '0, man: '0};
    end else if (e >= 11'sd255) begin
      s = '{sign: larger.sign, exp: '1, man: '0};
    end else begin
      s = '{sign: larger.sign, exp: e[7:0], man: sig[6:0]};
    end
  end

endmodule
