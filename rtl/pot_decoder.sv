// pot_decoder -- decodes one stored 3-bit PoT weight code.
//
// The stored lattice is asymmetric: {-1,-0.5,-0.25,-0.125, 0, +0.25,+0.5,+1}.
// A code is {sign, shift}: the weight is (-1)^sign * 2^-shift, and the slot
// that would hold +0.125 ({0,11}) is reused as the explicit zero. The decoder
// splits a code into an execution sign, a right-shift amount and a zero flag,
// so the datapath never sees a signed multiplier operand. For a zero code the
// sign and shift are forced to 0 so that a gated lane does not toggle.
//
// Purely combinational. The lattice and the separate sign/magnitude handling
// follow the paper; the bit-level layout of the code is this design's choice.
module pot_decoder
  import goquant_pkg::*;
(
  input  pot_code_t code,
  output pot_op_t   op
);

  always_comb begin
    op.zero  = (code == ZERO_CODE);
    op.neg   = op.zero ? 1'b0 : code[W_BITS-1];
    op.shift = op.zero ? '0   : code[SH_W-1:0];
  end

endmodule
