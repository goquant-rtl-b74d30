// dual_branch_core -- GoQuant shift-and-add inner-product core, two branches.
//
// Computes, for one 128-weight macro-block, the two dot products
//     dot1 = sum_i x_i * b1_i       dot2 = sum_i x_i * b2_i
// with parallel shifters and adders only. One beat carries one micro-block:
// G = 8 activations and the decoded b1 and b2 operands of those 8 lanes.
// Stage 1 shifts every lane in both branches (16 shifters) and registers the
// terms; stage 2 adds the 8 terms of each branch and adds the sum into that
// branch's accumulator. A beat flagged `in_first` restarts the accumulators;
// the beat flagged `in_last` closes the macro-block, and its totals appear on
// out_dot1/out_dot2 with out_valid high for exactly one cycle, 2 cycles after
// that beat was presented. Beats may come back to back or with gaps
// (in_valid low); there is no back-pressure.
//
// Results carry FRAC (= 3) fraction bits: out_dot = dot * 2^FRAC, exact.
//
// Two shifters feeding two adder/accumulator pairs, and a register between
// the shift stage and the add stage, follow the paper's core diagram; the
// lane count per beat (one micro-block), the fraction bits, widths and the
// asynchronous active-low reset are this design's choices.
module dual_branch_core
  import goquant_pkg::*;
#(
  parameter int ABITS  = 8,
  parameter int LANES  = G,
  parameter int BEATS  = N_MICRO,                          // beats per macro-block
  parameter int TW     = ABITS + FRAC + 1,                 // one shifted term
  parameter int ACC_W  = TW + $clog2(LANES * BEATS)        // 19 for A8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  logic signed [ABITS-1:0] in_x  [LANES],
  input  pot_op_t                 in_b1 [LANES],
  input  pot_op_t                 in_b2 [LANES],
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] out_dot1,
  output logic signed [ACC_W-1:0] out_dot2
);

  // ---------------- stage 1: parallel shifters ----------------
  logic signed [TW-1:0] t1 [LANES];
  logic signed [TW-1:0] t2 [LANES];

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    pot_shift_term #(.ABITS(ABITS), .TW(TW)) u_sh1 (.x(in_x[i]), .op(in_b1[i]), .term(t1[i]));
    pot_shift_term #(.ABITS(ABITS), .TW(TW)) u_sh2 (.x(in_x[i]), .op(in_b2[i]), .term(t2[i]));
  end

  logic                 s1_valid, s1_first, s1_last;
  logic signed [TW-1:0] s1_t1 [LANES];
  logic signed [TW-1:0] s1_t2 [LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      for (int i = 0; i < LANES; i++) begin
        s1_t1[i] <= '0;
        s1_t2[i] <= '0;
      end
    end else begin
      s1_valid <= in_valid;
      s1_first <= in_valid & in_first;
      s1_last  <= in_valid & in_last;
      if (in_valid) begin
        s1_t1 <= t1;
        s1_t2 <= t2;
      end
    end
  end

  // ---------------- stage 2: adders and accumulators ----------------
  logic signed [ACC_W-1:0] sum1, sum2;

  always_comb begin
    sum1 = '0;
    sum2 = '0;
    for (int i = 0; i < LANES; i++) begin
      sum1 += ACC_W'(s1_t1[i]);
      sum2 += ACC_W'(s1_t2[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_dot1  <= '0;
      out_dot2  <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= s1_valid & s1_last;
      if (s1_valid) begin
        out_dot1 <= (s1_first ? '0 : out_dot1) + sum1;
        out_dot2 <= (s1_first ? '0 : out_dot2) + sum2;
      end
    end
  end

endmodule
