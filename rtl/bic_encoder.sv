// bic_encoder: bus-invert encoder ("ENC") for one column of the array,
// placed between the weight buffer and the first PE of the column.
//
// Only the 7-bit fraction of each Bfloat16 weight is coded; sign and
// exponent pass through unchanged, as the paper prescribes (the exponents
// of CNN weights cluster near the bias and gain nothing from coding, the
// fractions are close to uniform). Each cycle the incoming fraction is XORed
// with the fraction that is currently on the output register, the ones are
// counted, and when more than half of the fraction bits would toggle
// (count > MAN_W/2, i.e. the MSB of the 3-bit count for MAN_W = 7) the
// complemented fraction is registered instead and the inv bit is set.
// So at most MAN_W/2 fraction wires toggle per cycle.
//
// Interface: w_in is the raw weight from the weight buffer, w_out the
// registered encoded weight with its inv bit, the first PE's north input.
// Timing: one register stage (the output register). Reset clears the output
// register to zero with inv = 0; the reset value is this design's choice.
module bic_encoder
  import lpsa_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  bf16_t w_in,
  output wgt_t  w_out
);

  logic [MAN_W-1:0]     diff;
  logic [$clog2(MAN_W+1)-1:0] ones;
  logic                 inv;
  bf16_t                enc;

  always_comb begin
    diff = w_in.man ^ w_out.data.man;
    ones = '0;
    for (int i = 0; i < int'(MAN_W); i++) ones = ones + diff[i];
    inv = (ones > ($clog2(MAN_W+1))'(MAN_W / 2));
    enc = '{sign: w_in.sign, exp: w_in.exp, man: inv ? ~w_in.man : w_in.man};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_out <= '0;
    end else begin
      w_out <= '{data: enc, inv: inv};
    end
  end

endmodule
