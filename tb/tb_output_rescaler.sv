// tb_output_rescaler -- random and corner-case rescaling.
// Expected output: floor((Y1*m1 + Y2*m2 + 2^(shift-1)) / 2^shift), clipped to
// [-128, 127] with the saturation flag, computed with 64-bit integers and
// division rather than shifts. Outputs must follow in_valid by one cycle.
module tb_output_rescaler;
  localparam int Y_W = 30, MBITS = 16, SHW = 6, OBITS = 8;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [Y_W-1:0] in_y1, in_y2;
  logic [MBITS-1:0] m1, m2;
  logic [SHW-1:0] shift;
  logic out_valid;
  logic signed [OBITS-1:0] out_y;
  logic out_sat;
  int checks = 0, failures = 0;
  int n_sat = 0, n_round_up = 0;

  output_rescaler #(.Y_W(Y_W), .MBITS(MBITS), .SHW(SHW), .OBITS(OBITS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint floordiv(input longint a, input longint d);
    longint q;
    q = a / d;
    if ((a % d != 0) && (a < 0)) q = q - 1;
    return q;
  endfunction

  initial begin
    longint acc, q, ey;
    bit es;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = 1;
      in_y1 = Y_W'($signed($urandom_range(0, 4000)) - 2000);
      in_y2 = Y_W'($signed($urandom_range(0, 4000)) - 2000);
      m1 = MBITS'($urandom_range(0, 300));
      m2 = MBITS'($urandom_range(0, 300));
      shift = SHW'($urandom_range(0, 16));
      if (n == 0) begin
        in_y1 = {1'b1, {(Y_W-1){1'b0}}}; in_y2 = {1'b1, {(Y_W-1){1'b0}}};
        m1 = '1; m2 = '1; shift = 0;
      end
      acc = longint'(in_y1) * longint'(m1) + longint'(in_y2) * longint'(m2);
      q = (shift == 0) ? acc : floordiv(acc + (longint'(1) << (shift - 1)), longint'(1) << shift);
      if (shift != 0 && q * (longint'(1) << shift) > acc) n_round_up++;
      es = (q > 127) || (q < -128);
      ey = (q > 127) ? 127 : (q < -128) ? -128 : q;
      if (es) n_sat++;
      @(negedge clk);
      in_valid = 0;
      checks += 3;
      if (!out_valid) begin failures++; $display("FAIL out_valid missing"); end
      if (longint'(out_y) != ey) begin
        failures++;
        $display("FAIL y1=%0d y2=%0d m1=%0d m2=%0d sh=%0d: out %0d exp %0d", in_y1, in_y2, m1, m2, shift, out_y, ey);
      end
      if (out_sat != es) begin failures++; $display("FAIL sat flag"); end
    end
    checks++;
    if (n_sat == 0 || n_round_up == 0) begin
      failures++;
      $display("FAIL coverage: saturations %0d round-ups %0d", n_sat, n_round_up);
    end
    $display("saturated outputs: %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
