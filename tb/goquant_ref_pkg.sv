// goquant_ref_pkg -- reference arithmetic for the GoQuant testbenches.
//
// Works on weight values scaled by 8 (so the lattice is integer):
// {-8,-4,-2,-1, 0, +2,+4,+8}. The secondary basis is built straight from the
// exchange rule, with the four pair lists written out as printed:
//   P1 = (0,1)(2,3)(4,5)(6,7)   P2 = (0,2)(1,3)(4,6)(5,7)
//   P3 = (0,3)(1,2)(4,7)(5,6)   P4 = (0,4)(1,5)(2,6)(3,7)
// For the k-th pair (i,j): eta = flip[k] ? -1 : +1, b2[i] = -eta*b1[j],
// b2[j] = +eta*b1[i].
package goquant_ref_pkg;

  // value * 8 of a stored 3-bit code {sign, shift}; {0,11} is zero
  function automatic int code_val8(input logic [2:0] c);
    case (c)
      3'b000: return 8;
      3'b001: return 4;
      3'b010: return 2;
      3'b011: return 0;
      3'b100: return -8;
      3'b101: return -4;
      3'b110: return -2;
      default: return -1;
    endcase
  endfunction

  // partner table: PAIRS[s-1][k] = {i, j}
  function automatic void pair_of(input int s, input int k, output int i, output int j);
    int tab [4][4][2] = '{
      '{'{0,1}, '{2,3}, '{4,5}, '{6,7}},
      '{'{0,2}, '{1,3}, '{4,6}, '{5,7}},
      '{'{0,3}, '{1,2}, '{4,7}, '{5,6}},
      '{'{0,4}, '{1,5}, '{2,6}, '{3,7}}
    };
    i = tab[s-1][k][0];
    j = tab[s-1][k][1];
  endfunction

  function automatic void make_b2(input int b1 [8], input int s, input logic [3:0] flip,
                                  output int b2 [8]);
    int i, j, eta;
    for (int k = 0; k < 4; k++) begin
      pair_of(s, k, i, j);
      eta   = flip[k] ? -1 : 1;
      b2[i] = -eta * b1[j];
      b2[j] =  eta * b1[i];
    end
  endfunction

endpackage
