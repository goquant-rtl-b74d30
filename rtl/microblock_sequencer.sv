// microblock_sequencer -- position of the current beat in the weight stream.
//
// The weight stream for one output is num_macro macro-blocks of BEATS
// micro-blocks each (BEATS = 128 / 8 = 16). For every beat presented with
// in_valid high this block says whether it is the first or last micro-block
// of its macro-block and whether that macro-block is the first or last one of
// the output. The flags are combinational from the counters; the counters
// advance at the clock edge that accepts the beat. num_macro = 0 is treated
// as 1. num_macro must not change while an output is in progress.
//
// The 16 micro-blocks per macro-block follow the paper; the paper only names
// the metadata-control logic, so counter widths and the runtime macro-block
// count are this design's choices.
module microblock_sequencer #(
  parameter int BEATS = 16,
  parameter int CNT_W = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [CNT_W-1:0]         num_macro,
  output logic                     first_micro,
  output logic                     last_micro,
  output logic                     first_macro,
  output logic                     last_macro,
  output logic [$clog2(BEATS)-1:0] micro_idx,
  output logic [CNT_W-1:0]         macro_idx
);

  localparam int MW = $clog2(BEATS);
  localparam logic [MW-1:0] LAST_BEAT = MW'(BEATS - 1);

  always_comb begin
    first_micro = (micro_idx == '0);
    last_micro  = (micro_idx == LAST_BEAT);
    first_macro = (macro_idx == '0);
    last_macro  = ({1'b0, macro_idx} + 1'b1 >= {1'b0, num_macro});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      micro_idx <= '0;
      macro_idx <= '0;
    end else if (in_valid) begin
      if (last_micro) begin
        micro_idx <= '0;
        macro_idx <= last_macro ? '0 : macro_idx + 1'b1;
      end else begin
        micro_idx <= micro_idx + 1'b1;
      end
    end
  end

endmodule
