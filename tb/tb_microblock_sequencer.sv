// tb_microblock_sequencer -- checks the beat-position flags against a plain
// count of accepted beats, for several macro-block counts (0 counts as 1),
// with random gaps between beats.
module tb_microblock_sequencer;
  localparam int BEATS = 16;
  localparam int CNT_W = 16;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [CNT_W-1:0] num_macro;
  logic first_micro, last_micro, first_macro, last_macro;
  logic [3:0] micro_idx;
  logic [CNT_W-1:0] macro_idx;
  int checks = 0, failures = 0;

  microblock_sequencer #(.BEATS(BEATS), .CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nm_list [5] = '{1, 3, 0, 5, 2};
    int nm, mb, mc;
    num_macro = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (nm_list[t]) begin
      @(negedge clk) in_valid = 0;
      num_macro = CNT_W'(nm_list[t]);
      nm = (nm_list[t] == 0) ? 1 : nm_list[t];
      for (int rep = 0; rep < 2; rep++) begin
        for (int beat = 0; beat < nm * BEATS; beat++) begin
          mb = beat % BEATS;
          mc = beat / BEATS;
          @(negedge clk);
          in_valid = 0;
          while ($urandom_range(0, 3) == 0) @(negedge clk);
          in_valid = 1;
          #1;
          checks++;
          if (first_micro != (mb == 0) || last_micro != (mb == BEATS - 1) ||
              first_macro != (mc == 0) || last_macro != (mc == nm - 1)) begin
            failures++;
            $display("FAIL nm=%0d beat %0d flags %b%b%b%b", nm, beat,
                     first_micro, last_micro, first_macro, last_macro);
          end
        end
      end
    end
    @(negedge clk) in_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
