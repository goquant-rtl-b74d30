// goquant_top -- one GoQuant output engine: PoT shift-and-add inference of
// y = x . w for one output, with w stored as c1*b1 + c2*b2 per macro-block.
//
// Data flow per beat (one 8-weight micro-block):
//   stored codes -> 8 x pot_decoder -> b1 operands --------------+
//                                   -> exchange_network -> b2 ---+-> dual_branch_core
//   activations x[0..7] ------------------------------------------+
// The sequencer tracks the micro-block position (16 per macro-block) and the
// macro-block position (num_macro per output). When a macro-block closes,
// coef_scaler multiplies the two dot products by that macro-block's c1~, c2~
// and adds them into Y1, Y2; when the output's last macro-block closes,
// output_rescaler turns Y1, Y2 into the requantized OBITS-wide output.
//
// Interface: one beat per cycle with in_valid high (gaps allowed, no
// back-pressure): 8 activations, the micro-block record (8 codes, pattern
// index, 4 flip bits) and that macro-block's c1~, c2~, which need only be
// valid on the macro-block's last beat. cfg_num_macro is read with every
// beat and must stay constant over the beats of one output; cfg_m1, cfg_m2
// and cfg_shift are captured with the output's last beat, so they may change
// right after it.
// Timing: out_valid rises 4 cycles after the last beat of an output is
// presented (2 core stages, 1 coefficient stage, 1 rescale stage). out_y1 and
// out_y2 (the integer sums before global scaling, with 3 fraction bits) are
// valid one cycle earlier, with out_y_raw_valid.
//
// The decode / exchange / dual shift-and-add structure, G = 8, N = 128, the
// metadata and the coefficient scaling outside the core follow the paper;
// the beat format, the handshake, the widths and the rescaler form are this
// design's choices. Activations default to 8 bits (the paper's W3/A8 point).
module goquant_top
  import goquant_pkg::*;
#(
  parameter int ABITS = 8,          // activation bits b_a
  parameter int CBITS = 8,          // coefficient bits b_c
  parameter int CNT_W = 16,         // macro-block counter width
  parameter int MBITS = 16,         // rescale multiplier width
  parameter int SHW   = 6,          // rescale shift width
  parameter int OBITS = 8,          // output bits
  parameter int TW    = ABITS + FRAC + 1,
  parameter int ACC_W = TW + $clog2(N_MACRO),
  parameter int Y_W   = ACC_W + CBITS + CNT_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration
  input  logic [CNT_W-1:0]        cfg_num_macro,
  input  logic [MBITS-1:0]        cfg_m1,
  input  logic [MBITS-1:0]        cfg_m2,
  input  logic [SHW-1:0]          cfg_shift,
  // beat stream
  input  logic                    in_valid,
  input  logic signed [ABITS-1:0] in_x [G],
  input  mb_record_t              in_rec,
  input  logic signed [CBITS-1:0] in_c1,
  input  logic signed [CBITS-1:0] in_c2,
  // results
  output logic                    out_y_raw_valid,
  output logic signed [Y_W-1:0]   out_y1,
  output logic signed [Y_W-1:0]   out_y2,
  output logic                    out_valid,
  output logic signed [OBITS-1:0] out_y,
  output logic                    out_sat
);

  // ---------------- decode and exchange ----------------
  pot_op_t b1 [G];
  pot_op_t b2 [G];

  for (genvar i = 0; i < G; i++) begin : g_dec
    pot_decoder u_dec (.code(in_rec.code[i]), .op(b1[i]));
  end

  exchange_network u_xchg (.b1(b1), .meta(in_rec.meta), .b2(b2));

  // ---------------- sequencing ----------------
  logic first_micro, last_micro, first_macro, last_macro;

  microblock_sequencer #(.BEATS(N_MICRO), .CNT_W(CNT_W)) u_seq (
    .clk, .rst_n, .in_valid, .num_macro(cfg_num_macro),
    .first_micro, .last_micro, .first_macro, .last_macro,
    .micro_idx(), .macro_idx()
  );

  // ---------------- shift-and-add core ----------------
  logic                    core_valid;
  logic signed [ACC_W-1:0] dot1, dot2;

  dual_branch_core #(.ABITS(ABITS), .LANES(G), .BEATS(N_MICRO), .TW(TW), .ACC_W(ACC_W)) u_core (
    .clk, .rst_n, .in_valid,
    .in_first(first_micro), .in_last(last_micro),
    .in_x, .in_b1(b1), .in_b2(b2),
    .out_valid(core_valid), .out_dot1(dot1), .out_dot2(dot2)
  );

  // Macro-block side information (coefficients, position, rescale settings),
  // captured with the macro-block's last beat and used when the core delivers
  // that macro-block 2 cycles later and the rescaler 1 cycle after that. The
  // next last beat is at least 16 cycles away, so one register suffices.
  typedef struct packed {
    logic                    first_macro;
    logic                    last_macro;
    logic signed [CBITS-1:0] c1;
    logic signed [CBITS-1:0] c2;
    logic [MBITS-1:0]        m1;
    logic [MBITS-1:0]        m2;
    logic [SHW-1:0]          shift;
  } mb_side_t;

  mb_side_t side_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      side_q <= '0;
    else if (in_valid && last_micro)
      side_q <= '{first_macro: first_macro, last_macro: last_macro, c1: in_c1, c2: in_c2,
                  m1: cfg_m1, m2: cfg_m2, shift: cfg_shift};
  end

  // ---------------- coefficient scaling ----------------
  coef_scaler #(.ACC_W(ACC_W), .CBITS(CBITS), .CNT_W(CNT_W), .Y_W(Y_W)) u_coef (
    .clk, .rst_n, .in_valid(core_valid),
    .in_first_macro(side_q.first_macro), .in_last_macro(side_q.last_macro),
    .in_dot1(dot1), .in_dot2(dot2), .in_c1(side_q.c1), .in_c2(side_q.c2),
    .out_valid(out_y_raw_valid), .out_y1, .out_y2
  );

  // ---------------- global rescale / requantize ----------------
  output_rescaler #(.Y_W(Y_W), .MBITS(MBITS), .SHW(SHW), .OBITS(OBITS)) u_rescale (
    .clk, .rst_n, .in_valid(out_y_raw_valid),
    .in_y1(out_y1), .in_y2(out_y2), .m1(side_q.m1), .m2(side_q.m2), .shift(side_q.shift),
    .out_valid, .out_y, .out_sat
  );

endmodule
