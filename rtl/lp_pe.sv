// lp_pe: low-power output-stationary processing element.
//
// Each PE multiplies the activation arriving from the West by the weight
// arriving from the North and adds the product into its local accumulator
// (output-stationary dataflow); both operands are passed on through
// registers to the East and South neighbours.
//
// Low-power features, as drawn for the paper's "Low-Power OS" PE:
//   * Weight decode: the weight travels South bus-invert coded; the PE only
//     XORs the 7 fraction bits with the inv bit to recover the true weight
//     for its multiplier. The coded word and inv bit are what it registers
//     and forwards, so the vertical pipeline keeps the low toggle rate.
//   * Zero-value clock gating: when is_zero is set the activation register
//     towards the East is not loaded (in silicon a clock-gating cell; here a
//     register enable, which synthesis maps to one), while the is_zero
//     register itself is always loaded. The zero flag also forces both
//     multiplier operands to zero (data gating) and the accumulator keeps
//     its value, since the product is known to be zero (bypass).
//   * Unload: when unload is set the accumulator loads acc_in, the North
//     neighbour's accumulator, so the column shifts its results South one
//     row per cycle. The top row gets zero, which also clears the array.
//
// Timing: a_out, w_out and acc_out are registers, one cycle per PE hop. The
// multiply-add is combinational within the cycle. The register enables used
// for gating and the unload shift follow the paper's figure; reset to zero
// and the enable form of the clock gate are this design's choices.
module lp_pe
  import lpsa_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  unload,
  input  act_t  a_in,
  input  wgt_t  w_in,
  input  bf16_t acc_in,
  output act_t  a_out,
  output wgt_t  w_out,
  output bf16_t acc_out
);

  bf16_t w_dec, mul_a, mul_b, prod, sum;

  always_comb begin
    w_dec     = w_in.data;
    w_dec.man = w_in.data.man ^ {MAN_W{w_in.inv}};
    mul_a     = a_in.is_zero ? '0 : a_in.data;
    mul_b     = a_in.is_zero ? '0 : w_dec;
  end

  bf16_mul u_mul (.a(mul_a), .b(mul_b), .p(prod));
  bf16_add u_add (.a(acc_out), .b(prod), .s(sum));

  // Horizontal pipeline: value register gated by is_zero, flag always loaded.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out.data <= '0;
    end else if (!a_in.is_zero) begin
      a_out.data <= a_in.data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out.is_zero <= 1'b1;
      w_out         <= '0;
    end else begin
      a_out.is_zero <= a_in.is_zero;
      w_out         <= w_in;
    end
  end

  // Accumulator: shift on unload, otherwise accumulate unless bypassed.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_out <= '0;
    end else if (unload) begin
      acc_out <= acc_in;
    end else if (!a_in.is_zero) begin
      acc_out <= sum;
    end
  end

endmodule
