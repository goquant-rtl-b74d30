// tb_exchange_network -- checks the strided dual exchange of one micro-block.
// For random b1 vectors and all 4 patterns x 16 flip settings, the b2 lanes
// are compared with the reference built from the printed pair lists, and
// <b1, b2> = 0 is checked. The micro-block "a" example of the exchange figure
// (b2 = -B01, B00, B03, -B02, -B05, ...) is checked explicitly.
module tb_exchange_network;
  import goquant_pkg::*;
  import goquant_ref_pkg::*;

  pot_op_t    b1 [G];
  pot_op_t    b2 [G];
  xchg_meta_t meta;
  int checks = 0, failures = 0;

  exchange_network dut (.b1(b1), .meta(meta), .b2(b2));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int val8(input pot_op_t o);
    return o.zero ? 0 : ((o.neg ? -1 : 1) * (8 >> o.shift));
  endfunction

  task automatic set_b1(input int v [8]);
    for (int i = 0; i < 8; i++) begin
      b1[i].zero  = (v[i] == 0);
      b1[i].neg   = (v[i] < 0);
      case (v[i] < 0 ? -v[i] : v[i])
        8: b1[i].shift = 2'd0;
        4: b1[i].shift = 2'd1;
        2: b1[i].shift = 2'd2;
        default: b1[i].shift = (v[i] == 0) ? 2'd0 : 2'd3;
      endcase
    end
  endtask

  initial begin
    int v [8], e [8], dot;
    int lattice [8] = '{-8, -4, -2, -1, 0, 2, 4, 8};
    // figure example, micro-block a, s = 1: pairs (0,1) eta=+1, (2,3) eta=-1, (4,5) eta=+1
    v = '{8, 4, -2, 2, -4, -1, 0, 8};
    set_b1(v);
    meta.pattern = 2'd0;
    meta.flip    = 4'b0010;
    #1;
    checks++;
    if (val8(b2[0]) != -v[1] || val8(b2[1]) != v[0] || val8(b2[2]) != v[3] ||
        val8(b2[3]) != -v[2] || val8(b2[4]) != -v[5]) begin
      failures++;
      $display("FAIL figure example");
    end
    for (int n = 0; n < 60; n++) begin
      for (int i = 0; i < 8; i++) v[i] = lattice[$urandom_range(0, 7)];
      set_b1(v);
      for (int p = 0; p < 4; p++) begin
        for (int f = 0; f < 16; f++) begin
          meta.pattern = 2'(p);
          meta.flip    = 4'(f);
          #1;
          make_b2(v, p + 1, 4'(f), e);
          dot = 0;
          for (int i = 0; i < 8; i++) begin
            checks++;
            if (val8(b2[i]) != e[i]) begin
              failures++;
              if (failures < 10)
                $display("FAIL s=%0d flip=%b lane %0d got %0d exp %0d", p + 1, f, i, val8(b2[i]), e[i]);
            end
            dot += v[i] * val8(b2[i]);
          end
          checks++;
          if (dot != 0) begin
            failures++;
            $display("FAIL <b1,b2> = %0d", dot);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
