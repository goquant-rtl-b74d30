# GoQuant inference engine: a power-of-two dot product with an orthogonal residual basis

GoQuant is a weight format for 3-bit transformer inference in which every
weight multiplication is a shift. A plain power-of-two (PoT) code gives each
weight one of a few exponentially spaced values. A vector of such codes can
only point in a coarse set of directions, and this direction error hurts
accuracy more than magnitude error does. GoQuant therefore stores every
128-weight block as

    w  ≈  c1 · b1  +  c2 · b2          with  <b1, b2> = 0

Here `b1` holds the PoT codes and `b2` is a second PoT vector. `b2` is never
stored: the hardware rebuilds it from `b1` by swapping lanes in pairs and
flipping signs, using 6 bits of metadata per 8 weights. Each swap is a
90-degree rotation in the plane of its two lanes, so `b2` is exactly
orthogonal to `b1` whatever the metadata says. The two dot products `x·b1`
and `x·b2` need only shifters and adders. The two real coefficients are
applied once per block, outside the inner loop.

This repository holds synthesizable SystemVerilog for the inference side of
the method, as described in the GoQuant paper (Xiang, Luo, Wang). It covers
code decoding, the exchange network, the dual-branch shift-and-add core,
block-coefficient scaling and output requantization. It also has
self-checking testbenches for every module. The offline quantizer that
produces the codes is software and is modelled here only inside the
testbenches.

## 1. Number formats

| Item | Size | Meaning |
|---|---|---|
| weight code | 3 bits per weight | `{sign, shift[1:0]}`: value = (-1)^sign · 2^-shift. Code `011`, the slot that would hold +0.125, is the zero. Lattice: {-1, -0.5, -0.25, -0.125, 0, +0.25, +0.5, +1} |
| pattern index | 2 bits per 8 weights | exchange stride s = index + 1, s ∈ {1,2,3,4} |
| flip bits | 4 bits per 8 weights | one per exchanged pair. `1` means the pair's sign factor η = -1 |
| c1~, c2~ | 8-bit signed, per 128 weights | quantized block coefficients: c1 = s_c1·c1~, c2 = s_c2·c2~, with b1 and b2 in lattice units (see §4) |
| activations | 8-bit signed (`ABITS`) | quantized activations. 3-, 4- and 6-bit activations are sign-extended into the lanes |

One micro-block record (`mb_record_t` in `goquant_pkg`) is 8 codes + 2 + 4
bits = 30 bits, so the metadata costs 0.75 bit per weight. A macro-block is
16 micro-blocks (called a to p), 128 weights, sharing one (c1~, c2~) pair.

The paper fixes the lattice, the zero state, the block sizes and the number
of metadata bits. It does not fix their bit-level layout. The layout above
is this design's choice. The sign/shift split makes the decoder two wires
and one comparator.

## 2. The exchange network (`exchange_network`)

This is the part of the design that needs the most care. For stride s,
lane i is paired with lane `j = i XOR s`. The four strides give these pairs:

| s | pairs (pair 0, 1, 2, 3) |
|---|---|
| 1 | (0,1) (2,3) (4,5) (6,7) |
| 2 | (0,2) (1,3) (4,6) (5,7) |
| 3 | (0,3) (1,2) (4,7) (5,6) |
| 4 | (0,4) (1,5) (2,6) (3,7) |

For a pair (i, j) with i < j and sign factor η:

    b2[i] = -η · b1[j]        b2[j] = +η · b1[i]

So `b1[i]·b2[i] + b1[j]·b2[j] = 0` for every pair. The pairs cover all
eight lanes, so `<b1, b2> = 0` for each micro-block and for the whole
macro-block.

In hardware each output lane i sees four possible partners (i^1, i^2, i^3,
i^4). A 4-to-1 multiplexer, steered by the pattern index, picks the partner.
One XOR sets the sign: the partner's sign, XOR the pair's flip bit, XOR 1 if
i is the lower lane of its pair. Flip bit k belongs to pair k in the table's
order, which lists pairs by their lower lane. The magnitude moves unchanged.
This is why b2 can hold +0.125, which is not a stored code: magnitude and
sign travel separately after decoding, so no extra code point is needed.

Example (micro-block a, s = 1, flip = `0010`): b1 = (B0, B1, B2, B3, B4, B5, …)
gives b2 = (-B1, B0, B3, -B2, -B5, B4, …).

The network is purely combinational: 8 four-way multiplexers of 4-bit
operands and 8 XOR gates. The metadata is chosen offline. The engine never
searches over patterns or signs.

## 3. The dual-branch shift-and-add core (`dual_branch_core`)

One beat is one micro-block: 8 activations, 8 decoded b1 operands and the
8 b2 operands from the exchange network. The core has two identical
branches:

* **Stage 1, shifters.** Each lane of each branch widens the activation by
  FRAC = 3 fraction bits, so that a right shift by the PoT exponent (0 to 3)
  is exact. It shifts right and negates if the operand's sign is set. A zero
  code forces the shifter input to 0: the lane is gated and does not switch.
  The 16 terms are registered.
* **Stage 2, adders and accumulators.** Each branch sums its 8 terms and
  adds the sum into its accumulator. The first beat of a macro-block
  restarts the accumulator.

After the 16th beat the accumulators hold `8·(x·b1)` and `8·(x·b2)` exactly.
They are presented for one cycle with `out_valid`, 2 cycles after the last
beat entered. Widths are sized so that nothing can overflow: a 12-bit term
and a 19-bit accumulator for 8-bit activations. With no gaps the core takes
one micro-block per clock, so one 128-element macro-block dot product every
16 cycles.

The two branches of shifters, adders and accumulators follow the paper's
core diagram. These are this design's own choices: 8 lanes per beat, the
register between the shift stage and the add stage, and the fraction-bit
widening.

## 4. From blocks to an output (`microblock_sequencer`, `coef_scaler`, `output_rescaler`)

An output `y = x·w` over K inputs uses `num_macro = ceil(K/128)` macro-blocks.
If K is not a multiple of 128, pad the last block with zero codes.

* `microblock_sequencer` counts beats. It marks the first and last
  micro-block of each macro-block, and the first and last macro-block of
  each output.
* `coef_scaler` runs once per macro-block m. It forms `c1~_m·P1_m` and
  `c2~_m·P2_m` with two small multipliers and adds them into
  `Y1 = Σ c1~·P1` and `Y2 = Σ c2~·P2`. This is the only multiplication in the
  design, and it runs once per 128 weights.
* `output_rescaler` applies the two global scales. The layer output is
  `y = s_x·s_c1·Y1/8 + s_x·s_c2·Y2/8` (the /8 removes the core's fraction
  bits). s_x is the activation scale. s_c1 and s_c2 are the coefficient
  scales. For an output scale s_y, program

      m1 = round(s_x·s_c1 / (8·s_y) · 2^shift)
      m2 = round(s_x·s_c2 / (8·s_y) · 2^shift)

  The rescaler then outputs `sat8(floor((Y1·m1 + Y2·m2 + 2^(shift-1)) / 2^shift))`:
  it rounds half up, clips to [-128, 127] and raises `out_sat` when it clips.
  m1 and m2 are 16-bit unsigned and shift is 0 to 63.

The paper gives only the output formula and says rescaling or requantization
follows. The fixed-point multiplier-and-shift form, the rounding and the
8-bit output are this design's choices. `out_y1` and `out_y2` are also
brought out, for a user who wants to rescale differently.

## 5. Top level (`goquant_top`) interface and timing

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `cfg_num_macro` | in | 16 | macro-blocks per output (0 acts as 1). Hold it constant over an output's beats |
| `cfg_m1`, `cfg_m2`, `cfg_shift` | in | 16, 16, 6 | rescale settings. Read with the output's last beat |
| `in_valid` | in | 1 | a beat is presented. Gaps are allowed. There is no back-pressure |
| `in_x` | in | 8 × ABITS | activations of the 8 lanes |
| `in_rec` | in | 30 | micro-block record: codes, pattern index, flip bits |
| `in_c1`, `in_c2` | in | 8 | the macro-block's coefficients. Read with the macro-block's last beat |
| `out_y_raw_valid`, `out_y1`, `out_y2` | out | 1, 43, 43 | Y1 and Y2, 3 cycles after the output's last beat |
| `out_valid`, `out_y`, `out_sat` | out | 1, 8, 1 | requantized output, 4 cycles after the last beat |

Outputs follow one another back to back: the first beat of the next output
may come in the cycle after the last beat of the previous one. The engine
computes one output at a time. A layer is processed by streaming its weight
columns one after another, or by placing several engines side by side that
share `in_x`. The paper does not describe such an array; it is left to the
user.

Parameters of `goquant_top`: `ABITS` (8), `CBITS` (8), `CNT_W` (16),
`MBITS` (16), `SHW` (6), `OBITS` (8). The internal widths `TW`, `ACC_W` and
`Y_W` are derived from these. The package holds the block sizes (G = 8,
N = 128) and the code width (3).

## 6. Which models fit

The default build (3-bit weights, 8-bit activation lanes, up to 65535
macro-blocks per output) runs:

* the paper's W3/A3, W3/A4 and W3/A6 vision-transformer settings (DeiT, ViT,
  Swin; K from 96 to 4096);
* its W3/A8 LLaMA-2 settings (K = 4096, 5120, 11008, 13824).

W3/A16 needs `ABITS = 16`. The RTL supports this, and the workload testbench
runs it. The W4 settings cannot be run: the paper does not define the 4-bit
PoT lattice, so only the 3-bit one is built.

## 7. Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and includes a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_pot_decoder` | all 8 codes against the lattice; zero gating |
| `tb_exchange_network` | 60 random b1 vectors × 4 patterns × 16 flip settings against a reference built from the pair table; `<b1,b2> = 0`; the worked example above |
| `tb_dual_branch_core` | 40 random macro-blocks with random gaps, including the most negative activation; exact sums; 2-cycle latency; one result per macro-block |
| `tb_microblock_sequencer` | boundary flags for 0, 1, 2, 3 and 5 macro-blocks per output, with gaps |
| `tb_coef_scaler` | Y1, Y2 over 1 to 6 macro-blocks against 64-bit sums, including extreme operands |
| `tb_output_rescaler` | 3000 random cases against a division-based reference; rounding and saturation both occur |
| `tb_goquant_top` | end to end at default parameters: 19 outputs, including 4096- and 11008-long dot products; exact Y1, Y2 and output; 3- and 4-cycle latencies; orthogonality of every micro-block. It also counts that each mechanism happened: gated zero lanes, all four strides, both flip polarities, +0.125 lanes in b2, input gaps, back-to-back outputs, multi-block outputs, saturation both ways |
| `tb_goquant_workloads` | Gaussian weights quantized by a behavioural model of the offline GEO/REF quantizer (`goquant_quant_model_pkg`); layer widths of LLaMA-2-7B/13B and DeiT/ViT/Swin; an 8-bit and a 16-bit activation engine in lockstep. It checks exact results, that the two-basis fit error never exceeds the one-basis error, that the dequantized result tracks floating point (noise-to-signal about 0.05 for 6-bit or wider activations), and that over all outputs the two-basis result is closer to floating point than a b1-only fit (squared error about a third lower) |

To run a testbench with Verilator 5 from the repository root:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
      rtl/goquant_pkg.sv tb/goquant_ref_pkg.sv tb/goquant_quant_model_pkg.sv \
      tb/tb_goquant_top.sv --top-module tb_goquant_top
    ./obj_dir/Vtb_goquant_top

Replace the last file and the top-module name to run another testbench.
Each testbench builds in well under a minute and simulates in about a
second or less.

## 8. Where this RTL departs from, or goes beyond, the paper

These follow the paper:

* the 3-bit lattice with its explicit zero;
* G = 8 and N = 128;
* the XOR-stride exchange rule and its four patterns;
* 2 + 4 metadata bits per micro-block;
* a 4-to-1 multiplexer and a sign XOR per lane;
* two shift-and-add branches with accumulators;
* coefficient scaling outside the core, followed by rescaling.

These are this design's own choices, because the paper does not give them:

* the bit layout of codes and metadata;
* one micro-block per clock;
* the two-stage core pipeline and all latencies;
* the asynchronous reset;
* the beat handshake without back-pressure;
* all bit widths, including the 8-bit coefficients (b_c is not stated);
* the runtime macro-block count;
* the fixed-point rescaler.

The paper's equation writes the coefficients as one per output. Its text
and figures share them per 128-weight block, and that is what is built.

Not built: the offline quantizer (a GPU software step in the paper, here
only a testbench model); the weight and metadata memory (the paper gives
the format, not the memory); the activation quantizer (how s_x is found is
not stated); 4-bit weights (lattice not given). The paper's 0.32 ns
critical path and its energy-delay figures come from 28 nm synthesis of the
arithmetic core alone and are not reproduced here.

## 9. Files

`rtl/`: `goquant_pkg` (constants and types), `pot_decoder`,
`exchange_network`, `pot_shift_term` (one lane shifter), `dual_branch_core`,
`microblock_sequencer`, `coef_scaler`, `output_rescaler`, `goquant_top`.
`tb/`: the testbenches above, plus `goquant_ref_pkg` (reference arithmetic)
and `goquant_quant_model_pkg` (quantizer model).
