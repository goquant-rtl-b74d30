// goquant_pkg -- constants and types shared by the GoQuant inference datapath.
//
// GoQuant stores each weight as a 3-bit power-of-two (PoT) code of the
// primary basis b1. The secondary basis b2 is not stored: it is rebuilt from
// b1 inside every 8-weight micro-block by a signed pairwise exchange whose
// partner is lane i XOR s, s in {1,2,3,4}. Each micro-block carries 6 bits of
// metadata: a 2-bit pattern index and one flip bit per exchanged pair.
// Sixteen micro-blocks form one 128-weight macro-block, which shares the two
// coefficients c1 and c2.
//
// From the paper: G = 8, N = 128, the 3-bit lattice
// {-1,-0.5,-0.25,-0.125,0,+0.25,+0.5,+1}, the four XOR exchange patterns and
// the 2 + 4 metadata bits. Own choices: the bit-level code layout
// (sign bit + 2-bit right-shift amount, the "+0.125" slot meaning zero), the
// pattern index encoding (s = index + 1), the order of the flip bits (flip[k]
// belongs to the k-th pair of the pattern, pairs ordered by their lower lane)
// and the flip polarity (1 means eta = -1).
package goquant_pkg;

  // Micro-block size G and macro-block size N.
  localparam int G       = 8;
  localparam int N_MACRO = 128;
  localparam int N_MICRO = N_MACRO / G;          // 16 micro-blocks a..p

  // Stored PoT weight code: {sign, shift}. value = (-1)^sign * 2^-shift,
  // except {0, all ones} which is the explicit zero state.
  localparam int W_BITS = 3;
  localparam int SH_W   = W_BITS - 1;
  // Largest right shift; activations get this many fraction bits so that
  // every shift is exact.
  localparam int FRAC   = (1 << SH_W) - 1;       // 3 for W3

  localparam logic [W_BITS-1:0] ZERO_CODE = {1'b0, {SH_W{1'b1}}};

  // Exchange metadata: 4 patterns, 4 pairs per micro-block.
  localparam int N_PAT  = 4;
  localparam int PAT_W  = 2;
  localparam int N_PAIR = G / 2;

  typedef logic [W_BITS-1:0] pot_code_t;

  // Decoded PoT operand: magnitude as a right-shift amount, execution sign
  // carried apart, and a zero flag that gates the lane.
  typedef struct packed {
    logic            zero;
    logic            neg;
    logic [SH_W-1:0] shift;
  } pot_op_t;

  typedef struct packed {
    logic [PAT_W-1:0]  pattern;   // s = pattern + 1
    logic [N_PAIR-1:0] flip;      // flip[k] = 1 : eta = -1 for pair k
  } xchg_meta_t;

  // Stored record of one micro-block: 8 codes + 6 metadata bits = 30 bits.
  typedef struct packed {
    xchg_meta_t            meta;
    pot_code_t [G-1:0]     code;
  } mb_record_t;

  // Rank of the pair that holds lane i under exchange stride s: pairs of
  // pattern s are numbered 0..3 in the order of their lower lane.
  function automatic int pair_rank(input int i, input int s);
    int lo;
    int r;
    lo = ((i ^ s) < i) ? (i ^ s) : i;
    r  = 0;
    for (int j = 0; j < lo; j++)
      if (j < (j ^ s)) r++;
    return r;
  endfunction

endpackage
