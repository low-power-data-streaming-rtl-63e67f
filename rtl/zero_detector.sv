// zero_detector: the "==0" checker on the West edge of one array row.
//
// It flags an input (activation) whose value is zero, +0 or -0, so that the
// row's PEs can skip the multiply-accumulate and hold their input pipeline
// register instead of loading the zero (zero-value clock gating). The value
// itself is forwarded unchanged next to its is_zero flag.
//
// The paper names the checker and its purpose; treating both signed zeros
// as zero and leaving subnormals to the multiplier's flush-to-zero are this
// design's choices. Interface: a_in from the input buffer, a_out to the first
// PE of the row. Timing: combinational, no register; the PE's own input
// register is the first stage of the row pipeline.
module zero_detector
  import lpsa_pkg::*;
(
  input  bf16_t a_in,
  output act_t  a_out
);

  always_comb begin
    a_out.data    = a_in;
    a_out.is_zero = ({a_in.exp, a_in.man} == '0);
  end

endmodule
