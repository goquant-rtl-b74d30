// tb_coef_scaler -- random per-macro-block dot products and coefficients.
// Y1 = sum c1*P1 and Y2 = sum c2*P2 over 1..6 macro-blocks are compared with
// 64-bit sums, one cycle after the last macro-block; out_valid must pulse
// once per output.
module tb_coef_scaler;
  localparam int ACC_W = 19, CBITS = 8, CNT_W = 16;
  localparam int Y_W = ACC_W + CBITS + CNT_W;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first_macro = 0, in_last_macro = 0;
  logic signed [ACC_W-1:0] in_dot1 = 0, in_dot2 = 0;
  logic signed [CBITS-1:0] in_c1 = 0, in_c2 = 0;
  logic out_valid;
  logic signed [Y_W-1:0] out_y1, out_y2;
  int checks = 0, failures = 0;

  coef_scaler #(.ACC_W(ACC_W), .CBITS(CBITS), .CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e1, e2;
    int nm;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int o = 0; o < 200; o++) begin
      nm = $urandom_range(1, 6);
      e1 = 0; e2 = 0;
      for (int m = 0; m < nm; m++) begin
        @(negedge clk);
        in_valid       = 1;
        in_first_macro = (m == 0);
        in_last_macro  = (m == nm - 1);
        in_dot1 = (o == 0) ? {1'b1, {(ACC_W-1){1'b0}}} : ACC_W'($urandom);
        in_dot2 = (o == 0) ? {1'b0, {(ACC_W-1){1'b1}}} : ACC_W'($urandom);
        in_c1   = (o == 0) ? -8'sd128 : CBITS'($urandom);
        in_c2   = (o == 0) ? 8'sd127  : CBITS'($urandom);
        e1 += longint'(in_dot1) * longint'(in_c1);
        e2 += longint'(in_dot2) * longint'(in_c2);
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (out_valid != (m == nm - 1)) begin
          failures++;
          $display("FAIL out_valid=%b at macro %0d of %0d", out_valid, m, nm);
        end
        repeat ($urandom_range(0, 2)) @(negedge clk);
      end
      checks += 2;
      if (longint'(out_y1) != e1) begin failures++; $display("FAIL y1 %0d exp %0d", out_y1, e1); end
      if (longint'(out_y2) != e2) begin failures++; $display("FAIL y2 %0d exp %0d", out_y2, e2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
