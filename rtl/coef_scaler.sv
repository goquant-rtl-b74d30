// coef_scaler -- block-coefficient scaling outside the shift-and-add core.
//
// Each macro-block m delivers two dot products P1 = x.b1 and P2 = x.b2 from
// the core, with its own quantized coefficients c1~ and c2~. This block forms
//     Y1 = sum_m c1~_m * P1_m        Y2 = sum_m c2~_m * P2_m
// over the macro-blocks of one output: two small multipliers and two
// accumulators. in_first_macro restarts the sums; on in_last_macro the
// finished Y1, Y2 appear on the outputs with out_valid high for one cycle,
// one cycle after the inputs. The outputs hold until the next macro-block.
//
// That the coefficient multiply stays outside the inner-product loop, one
// multiply per macro-block and branch, follows the paper. How the
// per-macro-block products are summed, the widths and the one-cycle timing
// are this design's choices.
module coef_scaler #(
  parameter int ACC_W = 19,
  parameter int CBITS = 8,
  parameter int CNT_W = 16,
  parameter int Y_W   = ACC_W + CBITS + CNT_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first_macro,
  input  logic                    in_last_macro,
  input  logic signed [ACC_W-1:0] in_dot1,
  input  logic signed [ACC_W-1:0] in_dot2,
  input  logic signed [CBITS-1:0] in_c1,
  input  logic signed [CBITS-1:0] in_c2,
  output logic                    out_valid,
  output logic signed [Y_W-1:0]   out_y1,
  output logic signed [Y_W-1:0]   out_y2
);

  logic signed [ACC_W+CBITS-1:0] p1, p2;

  always_comb begin
    p1 = in_dot1 * in_c1;
    p2 = in_dot2 * in_c2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_y1    <= '0;
      out_y2    <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid & in_last_macro;
      if (in_valid) begin
        out_y1 <= (in_first_macro ? '0 : out_y1) + Y_W'(p1);
        out_y2 <= (in_first_macro ? '0 : out_y2) + Y_W'(p2);
      end
    end
  end

endmodule
