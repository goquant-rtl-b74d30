// tb_goquant_workloads -- dot products of the layer widths of the evaluated
// models, with weights quantized by the GoQuant algorithm (GEO or REF
// coefficients) instead of random codes.
//
// Two engines run in lockstep on the same weight stream: the default one
// (8-bit activation lanes, used for A3/A4/A6/A8) and one with 16-bit lanes
// (A16). For each case, Gaussian weights and activations are drawn, the
// weights are quantized per 128-weight macro-block by the behavioural model
// of the offline quantizer, c1 and c2 are quantized to 8-bit integers per
// output row, and the activations to A bits. Checks:
//  * both engines' Y1, Y2 and requantized outputs equal the exact integer
//    reference,
//  * every macro-block's two-basis fit error is no larger than its one-basis
//    error, and <b1, b2> = 0,
//  * the dequantized engine result tracks the floating-point dot product:
//    noise-to-signal ratio below 0.1 over all A6/A8/A16 outputs, and the
//    requantized output within 1.5 steps of the dequantized result,
//  * over all outputs, the two-basis result (float coefficients) is closer
//    to the floating-point dot product than the one-basis (b1 only) result.
// Layer widths (4096, 11008, 5120, 13824 for LLaMA-2 7B/13B; 384, 768, 1536,
// 3072, 96, 1024 for the DeiT/ViT/Swin models) are standard model sizes.
module tb_goquant_workloads;
  import goquant_pkg::*;
  import goquant_ref_pkg::*;
  import goquant_quant_model_pkg::*;

  localparam int CNT_W = 16, MBITS = 16, SHW = 6, OBITS = 8, CBITS = 8;
  localparam int YW8  = 8 + FRAC + 1 + 7 + CBITS + CNT_W;
  localparam int YW16 = 16 + FRAC + 1 + 7 + CBITS + CNT_W;

  logic clk = 0, rst_n = 0;
  logic [CNT_W-1:0] cfg_num_macro = 1;
  logic [MBITS-1:0] cfg_m1 = 0, cfg_m2 = 0;
  logic [SHW-1:0]   cfg_shift = 0;
  logic in_valid = 0;
  logic signed [7:0]  x8  [G];
  logic signed [15:0] x16 [G];
  mb_record_t in_rec;
  logic signed [CBITS-1:0] in_c1 = 0, in_c2 = 0;

  logic raw_v8, raw_v16, ov8, ov16, sat8, sat16;
  logic signed [YW8-1:0]  y1_8, y2_8;
  logic signed [YW16-1:0] y1_16, y2_16;
  logic signed [OBITS-1:0] oy8, oy16;

  goquant_top u_a8 (
    .clk, .rst_n, .cfg_num_macro, .cfg_m1, .cfg_m2, .cfg_shift,
    .in_valid, .in_x(x8), .in_rec, .in_c1, .in_c2,
    .out_y_raw_valid(raw_v8), .out_y1(y1_8), .out_y2(y2_8),
    .out_valid(ov8), .out_y(oy8), .out_sat(sat8)
  );

  goquant_top #(.ABITS(16)) u_a16 (
    .clk, .rst_n, .cfg_num_macro, .cfg_m1, .cfg_m2, .cfg_shift,
    .in_valid, .in_x(x16), .in_rec, .in_c1, .in_c2,
    .out_y_raw_valid(raw_v16), .out_y1(y1_16), .out_y2(y2_16),
    .out_valid(ov16), .out_y(oy16), .out_sat(sat16)
  );

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
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

  function automatic int requant(input longint y1, input longint y2, input int m1, input int m2, input int sh);
    longint acc, q;
    acc = y1 * m1 + y2 * m2;
    q = (sh == 0) ? acc : floordiv(acc + (longint'(1) << (sh - 1)), longint'(1) << sh);
    return (q > 127) ? 127 : (q < -128) ? -128 : int'(q);
  endfunction

  typedef struct { longint y1, y2; int y; } exp_t;
  exp_t e8_q [$], e16_q [$];
  int n8 = 0, n16 = 0;

  always @(posedge clk) if (rst_n) begin
    if (raw_v8 || raw_v16) begin
      // both engines see the same stream, so their results come together
      exp_t a, b;
      checks += 4;
      a = e8_q[0]; b = e16_q[0];
      if (longint'(y1_8) != a.y1 || longint'(y2_8) != a.y2) begin
        failures++; $display("FAIL A8 engine Y1/Y2 %0d %0d exp %0d %0d", y1_8, y2_8, a.y1, a.y2);
      end
      if (longint'(y1_16) != b.y1 || longint'(y2_16) != b.y2) begin
        failures++; $display("FAIL A16 engine Y1/Y2 %0d %0d exp %0d %0d", y1_16, y2_16, b.y1, b.y2);
      end
      if (!(raw_v8 && raw_v16)) begin failures++; $display("FAIL engines out of step"); end
    end
    if (ov8) begin
      exp_t a;
      a = e8_q.pop_front(); n8++;
      checks++;
      if (int'(oy8) != a.y) begin failures++; $display("FAIL A8 out_y %0d exp %0d", oy8, a.y); end
    end
    if (ov16) begin
      exp_t b;
      b = e16_q.pop_front(); n16++;
      checks++;
      if (int'(oy16) != b.y) begin failures++; $display("FAIL A16 out_y %0d exp %0d", oy16, b.y); end
    end
  end

  real noise_hi = 0.0, signal_hi = 0.0, noise_k1 = 0.0, noise_k2 = 0.0;
  int  n_out_total = 0, n_ref = 0, n_geo = 0;

  // one output: dot product of length k, activations of abits bits
  task automatic run_dot(input string name, input int k, input int abits, input bit ref_mode);
    int nm = (k + 127) / 128;
    real w [128], xf [];
    real xcal [][128];
    qblock_t qb [];
    real c1max = 0.0, c2max = 0.0, sc1, sc2, sx, xmax = 0.0, yf = 0.0, yhw, sy, r1, r2, rmax;
    int c1q [], c2q [], xq [];
    longint ey1_8 = 0, ey2_8 = 0, ey1_16 = 0, ey2_16 = 0, d1, d2, d1b, d2b;
    int qmax = (1 << (abits - 1)) - 1;
    int sh, m1, m2, x8v;
    exp_t a, b;

    xf = new[nm * 128];
    xq = new[nm * 128];
    qb = new[nm];
    c1q = new[nm];
    c2q = new[nm];
    xcal = new[ref_mode ? 16 : 0];
    for (int i = 0; i < nm * 128; i++) begin
      xf[i] = (i < k) ? nrand() : 0.0;
      if ((xf[i] < 0 ? -xf[i] : xf[i]) > xmax) xmax = (xf[i] < 0 ? -xf[i] : xf[i]);
    end
    sx = xmax / real'(qmax);
    for (int i = 0; i < nm * 128; i++) xq[i] = $rtoi(xf[i] / sx + (xf[i] < 0 ? -0.5 : 0.5));
    // weights, quantized block by block (zero padding beyond k)
    for (int m = 0; m < nm; m++) begin
      int ortho;
      for (int i = 0; i < 128; i++) w[i] = (128 * m + i < k) ? nrand() / $sqrt(real'(k)) : 0.0;
      foreach (xcal[n]) for (int i = 0; i < 128; i++) xcal[n][i] = (128 * m + i < k) ? nrand() : 0.0;
      qb[m] = quantize(w, ref_mode, xcal);
      for (int i = 0; i < 128; i++) yf += xf[128 * m + i] * w[i];
      checks += 2;
      if (qb[m].err_k2 > qb[m].err_k1 * (1.0 + 1.0e-9) + 1.0e-12) begin
        failures++; $display("FAIL %s: two-basis error above one-basis error", name);
      end
      ortho = 0;
      for (int i = 0; i < 128; i++) ortho += qb[m].b1[i] * qb[m].b2[i];
      if (ortho != 0) begin failures++; $display("FAIL %s: <b1,b2> = %0d", name, ortho); end
      if ((qb[m].c1 < 0 ? -qb[m].c1 : qb[m].c1) > c1max) c1max = (qb[m].c1 < 0 ? -qb[m].c1 : qb[m].c1);
      if ((qb[m].c2 < 0 ? -qb[m].c2 : qb[m].c2) > c2max) c2max = (qb[m].c2 < 0 ? -qb[m].c2 : qb[m].c2);
    end
    sc1 = (c1max == 0.0) ? 1.0 : c1max / 127.0;
    sc2 = (c2max == 0.0) ? 1.0 : c2max / 127.0;
    yhw = 0.0;
    for (int m = 0; m < nm; m++) begin
      c1q[m] = $rtoi(qb[m].c1 / sc1 + (qb[m].c1 < 0 ? -0.5 : 0.5));
      c2q[m] = $rtoi(qb[m].c2 / sc2 + (qb[m].c2 < 0 ? -0.5 : 0.5));
      d1 = 0; d2 = 0; d1b = 0; d2b = 0;
      for (int i = 0; i < 128; i++) begin
        x8v = int'(8'(xq[128 * m + i]));                   // what the 8-bit lanes see
        d1 += longint'(x8v) * qb[m].b1[i];
        d2 += longint'(x8v) * qb[m].b2[i];
        d1b += longint'(xq[128 * m + i]) * qb[m].b1[i];
        d2b += longint'(xq[128 * m + i]) * qb[m].b2[i];
      end
      ey1_8 += c1q[m] * d1;  ey2_8 += c2q[m] * d2;
      ey1_16 += c1q[m] * d1b; ey2_16 += c2q[m] * d2b;
    end
    yhw = sx * (sc1 * real'(ey1_16) + sc2 * real'(ey2_16));
    // one-basis against two-basis fit, same quantized activations
    begin
      real yk1 = 0.0, yk2 = 0.0, p1, p2;
      for (int m = 0; m < nm; m++) begin
        p1 = 0.0; p2 = 0.0;
        for (int i = 0; i < 128; i++) begin
          p1 += real'(xq[128 * m + i]) * real'(qb[m].b1[i]);
          p2 += real'(xq[128 * m + i]) * real'(qb[m].b2[i]);
        end
        yk1 += sx * qb[m].c1_k1 * p1;
        yk2 += sx * (qb[m].c1 * p1 + qb[m].c2 * p2);
      end
      noise_k1 += (yk1 - yf) * (yk1 - yf);
      noise_k2 += (yk2 - yf) * (yk2 - yf);
    end
    // output scale: about 64 steps for this output
    sy = ((yf < 0 ? -yf : yf) + 1.0e-6) / 64.0;
    r1 = sx * sc1 / sy;
    r2 = sx * sc2 / sy;
    rmax = (r1 > r2) ? r1 : r2;
    sh = 0;
    while (sh < 62 && rmax * (2.0 ** (sh + 1)) < 65535.0) sh++;
    m1 = $rtoi(r1 * (2.0 ** sh) + 0.5);
    m2 = $rtoi(r2 * (2.0 ** sh) + 0.5);
    a.y1 = ey1_8; a.y2 = ey2_8; a.y = requant(ey1_8, ey2_8, m1, m2, sh);
    b.y1 = ey1_16; b.y2 = ey2_16; b.y = requant(ey1_16, ey2_16, m1, m2, sh);
    e8_q.push_back(a);
    e16_q.push_back(b);
    // accuracy of the quantized computation against floating point
    if (abits >= 6) begin
      noise_hi  += (yhw - yf) * (yhw - yf);
      signal_hi += yf * yf;
    end
    checks++;
    begin
      real target = yhw / sy;
      int yint = (abits > 8) ? b.y : a.y;
      real diff = real'(yint) - target;
      if (target < 127.0 && target > -128.0 && (diff > 1.5 || diff < -1.5)) begin
        failures++; $display("FAIL %s: requantized %0d vs %f", name, yint, target);
      end
    end
    n_out_total++;
    if (ref_mode) n_ref++; else n_geo++;
    $display("  %-22s K=%5d A%0d %s  y=%9.4f  quantized=%9.4f", name, k, abits,
             ref_mode ? "REF" : "GEO", yf, yhw);

    // stream it
    for (int m = 0; m < nm; m++) begin
      for (int bt = 0; bt < N_MICRO; bt++) begin
        @(negedge clk);
        in_valid = 1;
        cfg_num_macro = CNT_W'(nm);
        cfg_m1 = MBITS'(m1); cfg_m2 = MBITS'(m2); cfg_shift = SHW'(sh);
        in_rec.meta.pattern = qb[m].pattern[bt];
        in_rec.meta.flip    = qb[m].flip[bt];
        for (int i = 0; i < G; i++) begin
          in_rec.code[i] = qb[m].code[8 * bt + i];
          x8[i]  = 8'(xq[128 * m + 8 * bt + i]);
          x16[i] = 16'(xq[128 * m + 8 * bt + i]);
        end
        in_c1 = CBITS'(c1q[m]);
        in_c2 = CBITS'(c2q[m]);
      end
    end
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    in_rec = '0;
    for (int i = 0; i < G; i++) begin x8[i] = 0; x16[i] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      run_dot("LLaMA-2-7B attn/up",   4096, 8,  1'b1);
      run_dot("LLaMA-2-7B down",     11008, 8,  1'b0);
      run_dot("LLaMA-2-7B attn/up",   4096, 16, 1'b1);
      run_dot("LLaMA-2-7B down",     11008, 16, 1'b1);
      run_dot("LLaMA-2-13B attn/up",  5120, 8,  1'b0);
      run_dot("LLaMA-2-13B down",    13824, 16, 1'b1);
      run_dot("DeiT-S/ViT-S qkv",      384, 3,  1'b0);
      run_dot("DeiT-S/ViT-S fc2",     1536, 4,  1'b1);
      run_dot("DeiT-B/ViT-B qkv",      768, 4,  1'b1);
      run_dot("DeiT-B/ViT-B fc2",     3072, 6,  1'b0);
      run_dot("Swin-S stage-1 qkv",     96, 6,  1'b1);
      run_dot("Swin-B stage-4 qkv",   1024, 3,  1'b0);
    end
    repeat (10) @(posedge clk);
    checks += 4;
    if (n8 != n_out_total || n16 != n_out_total) begin
      failures++; $display("FAIL outputs seen %0d/%0d of %0d", n8, n16, n_out_total);
    end
    if (signal_hi == 0.0 || noise_hi / signal_hi > 0.1) begin
      failures++; $display("FAIL noise-to-signal %f", noise_hi / signal_hi);
    end
    if (noise_k2 >= noise_k1) begin
      failures++; $display("FAIL two-basis error %f not below one-basis error %f", noise_k2, noise_k1);
    end
    if (n_ref == 0 || n_geo == 0) begin failures++; $display("FAIL a solver mode was not exercised"); end
    $display("noise-to-signal ratio over A6/A8/A16 outputs: %f", noise_hi / signal_hi);
    $display("squared output error, one basis: %f, two bases: %f", noise_k1, noise_k2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
