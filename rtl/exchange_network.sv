// exchange_network -- rebuilds the secondary basis b2 of one 8-lane micro-block.
//
// Strided dual exchange: under pattern s (s = 1..4) lane i is paired with
// lane j = i XOR s. For a pair (i, j), i < j, with sign factor eta:
//     b2[i] = -eta * b1[j]        b2[j] = +eta * b1[i]
// so every pair is a 90-degree rotation and b2 is exactly orthogonal to b1.
// Per output lane this is one 4-to-1 selection of the partner operand
// (lanes i^1, i^2, i^3, i^4, chosen by the 2-bit pattern index) and one XOR
// on the execution sign. The magnitude is routed unchanged, which is why b2
// may hold +0.125 although that value is not a stored code.
//
// Interface: decoded b1 lanes and the micro-block's metadata in, decoded b2
// lanes out. Combinational. The exchange rule, the four patterns, the 4-to-1
// multiplexer and the sign XOR follow the paper; the metadata bit encoding
// (pattern index = s - 1, flip[k] for the k-th pair by lower lane, flip = 1
// meaning eta = -1) is this design's choice.
module exchange_network
  import goquant_pkg::*;
(
  input  pot_op_t    b1 [G],
  input  xchg_meta_t meta,
  output pot_op_t    b2 [G]
);

  for (genvar i = 0; i < G; i++) begin : g_lane
    pot_op_t          cand  [N_PAT];
    logic [N_PAT-1:0] eta_n;      // flip bit of this lane's pair, per pattern
    logic [N_PAT-1:0] is_low;     // this lane is the lower index of its pair

    for (genvar k = 0; k < N_PAT; k++) begin : g_pat
      localparam int S    = k + 1;
      localparam int PART = i ^ S;
      localparam int RANK = pair_rank(i, S);
      assign cand[k]   = b1[PART];
      assign eta_n[k]  = meta.flip[RANK];
      assign is_low[k] = (i < PART);
    end

    pot_op_t sel;
    logic    flip_sel;
    logic    low_sel;

    always_comb begin
      sel      = cand[meta.pattern];        // 4-to-1 partner selection
      flip_sel = eta_n[meta.pattern];
      low_sel  = is_low[meta.pattern];
      b2[i]       = sel;
      // lower lane takes -eta, upper lane +eta
      b2[i].neg   = sel.zero ? 1'b0 : (sel.neg ^ flip_sel ^ low_sel);
    end
  end

endmodule
