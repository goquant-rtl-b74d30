// pot_shift_term -- one lane of a shift-and-add branch: x * (+/-2^-shift).
//
// The activation is first widened with FRAC fraction bits (FRAC = largest
// shift), then shifted right by the decoded PoT shift amount, which is exact,
// and negated when the execution sign is set. A zero weight gates the
// activation to 0 before the shifter (zero skipping: the lane does not
// switch). The result is x * value * 2^FRAC as a signed integer.
//
// Combinational. The right shift by the PoT exponent and the separate sign
// follow the paper; the fraction-bit widening is this design's choice.
module pot_shift_term
  import goquant_pkg::*;
#(
  parameter int ABITS = 8,
  parameter int TW    = ABITS + FRAC + 1
) (
  input  logic signed [ABITS-1:0] x,
  input  pot_op_t                 op,
  output logic signed [TW-1:0]    term
);

  logic signed [TW-1:0] xg;
  logic signed [TW-1:0] sh;

  always_comb begin
    xg   = op.zero ? '0 : (TW'(x) <<< FRAC);
    sh   = xg >>> op.shift;
    term = op.neg ? -sh : sh;
  end

endmodule
