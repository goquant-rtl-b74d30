// tb_dual_branch_core -- random macro-blocks through the shift-and-add core.
// Each macro-block is 16 beats of 8 random activations with random b1 and b2
// operands; gaps (in_valid low) are inserted at random. The expected results
// are sum(x * value * 8) per branch, computed with ordinary multiplication.
// The result must appear exactly 2 cycles after the macro-block's last beat,
// with out_valid high for one cycle only.
module tb_dual_branch_core;
  import goquant_pkg::*;

  localparam int ABITS = 8;
  localparam int ACC_W = ABITS + FRAC + 1 + 7;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic signed [ABITS-1:0] in_x [G];
  pot_op_t in_b1 [G];
  pot_op_t in_b2 [G];
  logic out_valid;
  logic signed [ACC_W-1:0] out_dot1, out_dot2;
  int checks = 0, failures = 0;
  int cycle = 0;

  dual_branch_core #(.ABITS(ABITS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int val8(input pot_op_t o);
    return o.zero ? 0 : ((o.neg ? -1 : 1) * (8 >> o.shift));
  endfunction

  function automatic pot_op_t rand_op();
    pot_op_t o;
    o.zero  = ($urandom_range(0, 5) == 0);
    o.neg   = o.zero ? 1'b0 : 1'($urandom);
    o.shift = o.zero ? 2'd0 : 2'($urandom);
    return o;
  endfunction

  // expected results, queued in order
  int exp1 [$], exp2 [$], exp_cycle [$];
  int n_valid_seen = 0;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      n_valid_seen++;
      checks += 3;
      if (exp1.size() == 0) begin
        failures += 3;
        $display("FAIL unexpected out_valid at cycle %0d", cycle);
      end else begin
        int e1, e2, ec;
        e1 = exp1.pop_front(); e2 = exp2.pop_front(); ec = exp_cycle.pop_front();
        if (out_dot1 != e1) begin failures++; $display("FAIL dot1 %0d exp %0d", out_dot1, e1); end
        if (out_dot2 != e2) begin failures++; $display("FAIL dot2 %0d exp %0d", out_dot2, e2); end
        if (cycle != ec) begin failures++; $display("FAIL latency: at %0d exp %0d", cycle, ec); end
      end
    end
  end

  initial begin
    int s1, s2;
    for (int i = 0; i < G; i++) begin in_x[i] = '0; in_b1[i] = '0; in_b2[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 40; m++) begin
      s1 = 0; s2 = 0;
      for (int b = 0; b < N_MICRO; b++) begin
        while ($urandom_range(0, 3) == 0) begin
          @(negedge clk); in_valid = 0;
          for (int i = 0; i < G; i++) in_x[i] = 8'($urandom);   // garbage while idle
        end
        @(negedge clk);
        in_valid = 1;
        in_first = (b == 0);
        in_last  = (b == N_MICRO - 1);
        for (int i = 0; i < G; i++) begin
          in_x[i]  = (m == 0) ? -8'sd128 : 8'($urandom);
          in_b1[i] = (m == 0) ? pot_op_t'{1'b0, 1'b1, 2'd0} : rand_op();
          in_b2[i] = (m == 0) ? pot_op_t'{1'b0, 1'b1, 2'd0} : rand_op();
          s1 += in_x[i] * val8(in_b1[i]);
          s2 += in_x[i] * val8(in_b2[i]);
        end
        if (b == N_MICRO - 1) begin
          exp1.push_back(s1); exp2.push_back(s2);
          exp_cycle.push_back(cycle + 2);
        end
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (n_valid_seen != 40 || exp1.size() != 0) begin
      failures++;
      $display("FAIL saw %0d results, expected 40", n_valid_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
