// output_rescaler -- global rescaling and requantization of one output.
//
// The layer output is y = (s_x*s_c1) * Y1 + (s_x*s_c2) * Y2. Here both
// scale products are given as unsigned fixed-point multipliers m1, m2 with a
// common right shift, so the integer output is
//     y = sat_OBITS( round( (Y1*m1 + Y2*m2) / 2^shift ) )
// with rounding half up (add 2^(shift-1), then arithmetic shift) and
// saturation to the signed OBITS range; out_sat flags a clipped result.
// The FRAC fraction bits of the core's results are folded into m1, m2 and
// shift by whoever programs them. One register stage: outputs appear one
// cycle after in_valid.
//
// The two scale factors and the idea of rescaling or requantizing after the
// coefficient multiply follow the paper; the fixed-point multiplier/shift
// form, rounding, saturation and all widths are this design's choices.
module output_rescaler #(
  parameter int Y_W   = 43,
  parameter int MBITS = 16,
  parameter int SHW   = 6,
  parameter int OBITS = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [Y_W-1:0]   in_y1,
  input  logic signed [Y_W-1:0]   in_y2,
  input  logic [MBITS-1:0]        m1,
  input  logic [MBITS-1:0]        m2,
  input  logic [SHW-1:0]          shift,
  output logic                    out_valid,
  output logic signed [OBITS-1:0] out_y,
  output logic                    out_sat
);

  localparam int PW = Y_W + MBITS + 2;
  localparam logic signed [PW-1:0] OMAX = (PW'(1) <<< (OBITS - 1)) - 1;
  localparam logic signed [PW-1:0] OMIN = -(PW'(1) <<< (OBITS - 1));

  logic signed [PW-1:0] acc, rnd, shifted;
  logic signed [OBITS-1:0] y_c;
  logic sat_c;

  always_comb begin
    acc = PW'(in_y1) * PW'($signed({1'b0, m1})) + PW'(in_y2) * PW'($signed({1'b0, m2}));
    rnd = (shift == '0) ? '0 : (PW'(1) <<< (shift - 1'b1));
    shifted = (acc + rnd) >>> shift;
    sat_c = 1'b0;
    if (shifted > OMAX) begin
      y_c   = OMAX[OBITS-1:0];
      sat_c = 1'b1;
    end else if (shifted < OMIN) begin
      y_c   = OMIN[OBITS-1:0];
      sat_c = 1'b1;
    end else begin
      y_c = shifted[OBITS-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_y     <= '0;
      out_sat   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_y   <= y_c;
        out_sat <= sat_c;
      end
    end
  end

endmodule
