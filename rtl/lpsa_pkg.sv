// lpsa_pkg: types and constants shared by the low-power output-stationary
// systolic array.
//
// A Bfloat16 word is 1 sign bit, 8 exponent bits (bias 127) and 7 fraction
// bits. The horizontal (input/activation) stream carries the value together
// with an is-zero flag; the vertical (weight) stream carries the value, whose
// fraction may be bus-invert coded, together with the inv bit that says so.
// Both bundles recur in every processing element, so they are packed structs
// here. Field widths 1/8/7 follow the paper's encoder drawing; the bundle
// grouping is this design's own choice.
package lpsa_pkg;

  localparam int unsigned EXP_W  = 8;   // exponent field
  localparam int unsigned MAN_W  = 7;   // fraction (mantissa) field

  typedef struct packed {
    logic             sign;
    logic [EXP_W-1:0] exp;
    logic [MAN_W-1:0] man;
  } bf16_t;

  // Canonical quiet NaN produced for invalid operations.
  localparam bf16_t BF16_QNAN = '{sign: 1'b0, exp: 8'hFF, man: 7'h40};

  // West-edge stream: activation plus its is-zero flag.
  typedef struct packed {
    bf16_t data;
    logic  is_zero;
  } act_t;

  // North-edge stream: weight (fraction possibly inverted) plus inv bit.
  typedef struct packed {
    bf16_t data;
    logic  inv;
  } wgt_t;

endpackage
