// goquant_quant_model_pkg -- behavioural model of the offline GoQuant
// quantizer, used only to produce realistic stimulus for the testbenches.
// It is not hardware: the quantizer runs before deployment.
//
// For one 128-weight macro-block w:
//   1. b1 = nearest point of {-1,-0.5,-0.25,-0.125,0,0.25,0.5,1} to w/max|w|
//   2. r  = w - (<w,b1>/|b1|^2) b1        (r = w when b1 = 0)
//   3. per 8-lane micro-block and stride s in 1..4:
//        A_s = sum over pairs (i,j) of |b1_i r_j - b1_j r_i|
//      pick the s with the largest A_s; eta_ij = sign(b1_i r_j - b1_j r_i)
//      (+1 when zero); b2_i = -eta b1_j, b2_j = +eta b1_i
//   4. GEO: c1 = <w,b1>/|b1|^2, c2 = <w,b2>/|b2|^2
//      REF: [c1 c2] = (A'A + 1e-4 I)^-1 A'Y with A = [X b1, X b2], Y = X w
// Lattice values are handled as integers scaled by 8.
package goquant_quant_model_pkg;
  import goquant_ref_pkg::*;

  // uniform in (0,1) and standard normal (Box-Muller)
  function automatic real urand();
    return (real'($urandom) + 1.0) / 4294967297.0;
  endfunction

  function automatic real nrand();
    return $sqrt(-2.0 * $ln(urand())) * $cos(6.283185307179586 * urand());
  endfunction

  // stored code of a lattice value given as value*8
  function automatic logic [2:0] code_of(input int v8);
    case (v8)
      8: return 3'b000;  4: return 3'b001;  2: return 3'b010;  0: return 3'b011;
      -8: return 3'b100; -4: return 3'b101; -2: return 3'b110; default: return 3'b111;
    endcase
  endfunction

  // one quantized macro-block
  typedef struct {
    logic [2:0] code [128];
    logic [1:0] pattern [16];
    logic [3:0] flip [16];
    int         b1 [128];     // value * 8
    int         b2 [128];     // value * 8
    real        c1, c2;       // coefficients for the *8 integer bases
    real        c1_k1;        // coefficient of the one-basis fit (b1 only)
    real        err_k1;       // |w - c1 b1|^2 with c1 of the one-basis fit
    real        err_k2;       // |w - c1 b1 - c2 b2|^2 (GEO coefficients)
  } qblock_t;

  function automatic qblock_t quantize(input real w [128], input bit ref_mode,
                                       input real xcal [][128]);
    qblock_t q;
    int lat [8] = '{-8, -4, -2, -1, 0, 2, 4, 8};
    real smax, v, best, d, wb1, b1b1, r [128], a, tot, besta;
    real wb2, b2b2, e;
    int bi, bs, i, j;
    smax = 0.0;
    for (int k = 0; k < 128; k++) if ((w[k] < 0 ? -w[k] : w[k]) > smax) smax = (w[k] < 0 ? -w[k] : w[k]);
    if (smax == 0.0) smax = 1.0;
    wb1 = 0.0; b1b1 = 0.0;
    for (int k = 0; k < 128; k++) begin
      v = w[k] / smax;
      best = 1.0e30; bi = 4;
      for (int l = 0; l < 8; l++) begin
        d = v - real'(lat[l]) / 8.0;
        d = d < 0 ? -d : d;
        if (d < best) begin best = d; bi = l; end
      end
      q.b1[k] = lat[bi];
      q.code[k] = code_of(lat[bi]);
      wb1 += w[k] * real'(q.b1[k]);
      b1b1 += real'(q.b1[k] * q.b1[k]);
    end
    for (int k = 0; k < 128; k++)
      r[k] = (b1b1 == 0.0) ? w[k] : w[k] - wb1 / b1b1 * real'(q.b1[k]);
    // micro-block sign inference and pattern selection
    for (int m = 0; m < 16; m++) begin
      int base = 8 * m;
      besta = -1.0; bs = 1;
      for (int s = 1; s <= 4; s++) begin
        tot = 0.0;
        for (int k = 0; k < 4; k++) begin
          pair_of(s, k, i, j);
          a = real'(q.b1[base+i]) * r[base+j] - real'(q.b1[base+j]) * r[base+i];
          tot += (a < 0 ? -a : a);
        end
        if (tot > besta) begin besta = tot; bs = s; end
      end
      q.pattern[m] = 2'(bs - 1);
      for (int k = 0; k < 4; k++) begin
        int eta;
        pair_of(bs, k, i, j);
        a = real'(q.b1[base+i]) * r[base+j] - real'(q.b1[base+j]) * r[base+i];
        eta = (a < 0.0) ? -1 : 1;
        q.flip[m][k] = (eta < 0);
        q.b2[base+i] = -eta * q.b1[base+j];
        q.b2[base+j] =  eta * q.b1[base+i];
      end
    end
    wb2 = 0.0; b2b2 = 0.0;
    for (int k = 0; k < 128; k++) begin
      wb2 += w[k] * real'(q.b2[k]);
      b2b2 += real'(q.b2[k] * q.b2[k]);
    end
    q.c1 = (b1b1 == 0.0) ? 0.0 : wb1 / b1b1;
    q.c2 = (b2b2 == 0.0) ? 0.0 : wb2 / b2b2;
    q.c1_k1 = q.c1;
    q.err_k1 = 0.0; q.err_k2 = 0.0;
    for (int k = 0; k < 128; k++) begin
      e = w[k] - q.c1 * real'(q.b1[k]);
      q.err_k1 += e * e;
      e = e - q.c2 * real'(q.b2[k]);
      q.err_k2 += e * e;
    end
    if (ref_mode && xcal.size() > 0) begin
      real g11 = 1.0e-4, g12 = 0.0, g22 = 1.0e-4, h1 = 0.0, h2 = 0.0, det, p1, p2, y;
      foreach (xcal[n]) begin
        p1 = 0.0; p2 = 0.0; y = 0.0;
        for (int k = 0; k < 128; k++) begin
          p1 += xcal[n][k] * real'(q.b1[k]);
          p2 += xcal[n][k] * real'(q.b2[k]);
          y  += xcal[n][k] * w[k];
        end
        g11 += p1 * p1; g12 += p1 * p2; g22 += p2 * p2;
        h1 += p1 * y;   h2 += p2 * y;
      end
      det = g11 * g22 - g12 * g12;
      if (det != 0.0) begin
        q.c1 = (g22 * h1 - g12 * h2) / det;
        q.c2 = (g11 * h2 - g12 * h1) / det;
      end
    end
    return q;
  endfunction

endpackage
