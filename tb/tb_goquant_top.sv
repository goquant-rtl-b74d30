// tb_goquant_top -- end-to-end test of the GoQuant output engine at its
// default parameters (W3 codes, 8-bit activations, 8-bit coefficients).
//
// A sequence of outputs is streamed, each made of num_macro macro-blocks of
// 16 random micro-blocks: random activations, random 3-bit codes, random
// exchange pattern and flip bits per micro-block, random c1~, c2~ per
// macro-block (driven only on the macro-block's last beat; other beats carry
// garbage). Sizes include 1, 3, 32 (a 4096-wide dot product) and 86 (an
// 11008-wide one) macro-blocks. The reference rebuilds b2 from the printed
// pair lists, forms Y1 = sum c1 * (x.b1 * 8), Y2 likewise, and the
// requantized output with ordinary integer arithmetic. It checks Y1, Y2 and
// the final output, their latencies (3 and 4 cycles after the last beat) and
// that <b1, b2> = 0 in every micro-block. Each mechanism must occur at least
// once: zero-code lanes, all four exchange patterns, both flip polarities, a
// +0.125 lane in b2, input gaps, back-to-back outputs, multi-macro-block
// accumulation, positive and negative saturation and unsaturated outputs.
module tb_goquant_top;
  import goquant_pkg::*;
  import goquant_ref_pkg::*;

  localparam int ABITS = 8, CBITS = 8, OBITS = 8, CNT_W = 16, MBITS = 16, SHW = 6;
  localparam int Y_W = ABITS + FRAC + 1 + 7 + CBITS + CNT_W;

  logic clk = 0, rst_n = 0;
  logic [CNT_W-1:0] cfg_num_macro;
  logic [MBITS-1:0] cfg_m1, cfg_m2;
  logic [SHW-1:0]   cfg_shift;
  logic in_valid = 0;
  logic signed [ABITS-1:0] in_x [G];
  mb_record_t in_rec;
  logic signed [CBITS-1:0] in_c1, in_c2;
  logic out_y_raw_valid, out_valid, out_sat;
  logic signed [Y_W-1:0] out_y1, out_y2;
  logic signed [OBITS-1:0] out_y;

  goquant_top dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;

  // mechanism counters
  int n_zero_lane = 0, n_b2_plus_eighth = 0, n_gap = 0, n_back_to_back = 0;
  int n_multi_macro = 0, n_sat_pos = 0, n_sat_neg = 0, n_unsat = 0;
  int n_pattern [4] = '{0, 0, 0, 0};
  int n_flip0 = 0, n_flip1 = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    longint y1, y2;
    int     y;
    bit     sat;
    int     cyc;
  } exp_t;
  exp_t exp_q [$];
  exp_t exp_raw_q [$];
  int n_out = 0, n_raw = 0;

  always @(posedge clk) if (rst_n) begin
    if (out_y_raw_valid) begin
      exp_t e;
      n_raw++;
      checks += 3;
      if (exp_raw_q.size() == 0) begin
        failures += 3; $display("FAIL unexpected raw result");
      end else begin
        e = exp_raw_q.pop_front();
        if (longint'(out_y1) != e.y1) begin failures++; $display("FAIL Y1 %0d exp %0d", out_y1, e.y1); end
        if (longint'(out_y2) != e.y2) begin failures++; $display("FAIL Y2 %0d exp %0d", out_y2, e.y2); end
        if (cycle != e.cyc + 3) begin failures++; $display("FAIL raw latency %0d", cycle - e.cyc); end
      end
    end
    if (out_valid) begin
      exp_t e;
      n_out++;
      checks += 3;
      if (exp_q.size() == 0) begin
        failures += 3; $display("FAIL unexpected output");
      end else begin
        e = exp_q.pop_front();
        if (int'(out_y) != e.y) begin failures++; $display("FAIL y %0d exp %0d", out_y, e.y); end
        if (out_sat != e.sat) begin failures++; $display("FAIL sat %b exp %b", out_sat, e.sat); end
        if (cycle != e.cyc + 4) begin failures++; $display("FAIL output latency %0d", cycle - e.cyc); end
      end
    end
  end

  function automatic longint floordiv(input longint a, input longint d);
    longint q;
    q = a / d;
    if ((a % d != 0) && (a < 0)) q = q - 1;
    return q;
  endfunction

  // stream one output of nm macro-blocks
  task automatic run_output(input int nm, input int gap_pct, input int zero_pct,
                            input int m1, input int m2, input int sh);
    longint y1 = 0, y2 = 0, acc, q;
    int d1, d2, ortho;
    int b1 [8], b2 [8];
    logic [2:0] c;
    exp_t e;
    if (nm > 1) n_multi_macro++;
    for (int m = 0; m < nm; m++) begin
      logic signed [CBITS-1:0] c1, c2;
      c1 = CBITS'($urandom); c2 = CBITS'($urandom);
      d1 = 0; d2 = 0;
      for (int b = 0; b < N_MICRO; b++) begin
        if ($urandom_range(0, 99) < gap_pct) begin
          @(negedge clk);
          in_valid = 0;
          in_rec = mb_record_t'({$urandom, $urandom});
          n_gap++;
          repeat ($urandom_range(0, 2)) @(negedge clk);
        end
        @(negedge clk);
        if (m == 0 && b == 0 && in_valid) n_back_to_back++;
        in_valid = 1;
        // settings of the previous output were taken with its last beat
        cfg_num_macro = CNT_W'(nm);
        cfg_m1 = MBITS'($urandom); cfg_m2 = MBITS'($urandom); cfg_shift = SHW'($urandom);
        if (m == nm - 1 && b == N_MICRO - 1) begin
          cfg_m1 = MBITS'(m1); cfg_m2 = MBITS'(m2); cfg_shift = SHW'(sh);
        end
        in_rec.meta.pattern = 2'($urandom);
        in_rec.meta.flip    = 4'($urandom);
        n_pattern[in_rec.meta.pattern]++;
        for (int k = 0; k < 4; k++) if (in_rec.meta.flip[k]) n_flip1++; else n_flip0++;
        for (int i = 0; i < G; i++) begin
          c = ($urandom_range(0, 99) < zero_pct) ? 3'b011 : 3'($urandom);
          in_rec.code[i] = c;
          in_x[i] = ABITS'($urandom);
          b1[i] = code_val8(c);
          if (b1[i] == 0) n_zero_lane++;
        end
        make_b2(b1, int'(in_rec.meta.pattern) + 1, in_rec.meta.flip, b2);
        ortho = 0;
        for (int i = 0; i < G; i++) begin
          d1 += int'(in_x[i]) * b1[i];
          d2 += int'(in_x[i]) * b2[i];
          ortho += b1[i] * b2[i];
          if (b2[i] == 1) n_b2_plus_eighth++;
        end
        checks++;
        if (ortho != 0) begin failures++; $display("FAIL reference <b1,b2> != 0"); end
        if (b == N_MICRO - 1) begin
          in_c1 = c1; in_c2 = c2;
        end else begin
          in_c1 = CBITS'($urandom); in_c2 = CBITS'($urandom);
        end
      end
      y1 += longint'(c1) * d1;
      y2 += longint'(c2) * d2;
    end
    acc = y1 * m1 + y2 * m2;
    q = (sh == 0) ? acc : floordiv(acc + (longint'(1) << (sh - 1)), longint'(1) << sh);
    e.y1 = y1; e.y2 = y2; e.cyc = cycle;
    e.sat = (q > 127) || (q < -128);
    e.y = (q > 127) ? 127 : (q < -128) ? -128 : int'(q);
    if (q > 127) n_sat_pos++; else if (q < -128) n_sat_neg++; else n_unsat++;
    exp_q.push_back(e);
    exp_raw_q.push_back(e);
  endtask

  task automatic mech(input string name, input int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", name);
    end else
      $display("  %-28s %0d", name, n);
  endtask

  initial begin
    int n_expected;
    cfg_num_macro = 1; cfg_m1 = 0; cfg_m2 = 0; cfg_shift = 0;
    in_c1 = 0; in_c2 = 0; in_rec = '0;
    for (int i = 0; i < G; i++) in_x[i] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // small outputs, with gaps and without, back to back
    run_output(1, 0, 20, 1, 1, 14);
    run_output(1, 30, 20, 40, 40, 12);
    run_output(3, 0, 10, 3, 5, 16);
    for (int r = 0; r < 12; r++)
      run_output($urandom_range(1, 4), (r % 2) * 25, 15,
                 $urandom_range(0, 255), $urandom_range(0, 255), $urandom_range(10, 20));
    // strong gain: saturates
    run_output(2, 0, 0, 65535, 65535, 2);
    run_output(2, 0, 0, 65535, 65535, 2);
    // one full 4096-wide dot product (LLaMA-2-7B hidden size) and one 11008-wide
    run_output(32, 5, 12, 7, 9, 20);
    run_output(86, 5, 12, 2, 2, 22);
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);

    n_expected = 3 + 12 + 2 + 2;
    checks += 2;
    if (n_out != n_expected || exp_q.size() != 0) begin
      failures++; $display("FAIL %0d outputs seen, %0d expected", n_out, n_expected);
    end
    if (n_raw != n_expected || exp_raw_q.size() != 0) begin
      failures++; $display("FAIL %0d raw results seen, %0d expected", n_raw, n_expected);
    end

    $display("mechanisms:");
    mech("zero-code lanes gated", n_zero_lane);
    mech("pattern s=1", n_pattern[0]);
    mech("pattern s=2", n_pattern[1]);
    mech("pattern s=3", n_pattern[2]);
    mech("pattern s=4", n_pattern[3]);
    mech("flip bit 0 (eta=+1)", n_flip0);
    mech("flip bit 1 (eta=-1)", n_flip1);
    mech("b2 lane = +0.125", n_b2_plus_eighth);
    mech("input gaps", n_gap);
    mech("back-to-back outputs", n_back_to_back);
    mech("multi-macro-block outputs", n_multi_macro);
    mech("positive saturation", n_sat_pos);
    mech("negative saturation", n_sat_neg);
    mech("unsaturated outputs", n_unsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
