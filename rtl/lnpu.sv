// lnpu -- one lane of the local node processing unit (local pass).
//
// For each block of a layer, the lane takes the Q message saved by the
// global pass and the layer's compressed check-node state (first and
// second minimum, position of the first minimum, signs), rebuilds the new
// check-to-variable message R_new of that block and returns the updated
// posterior P = Q + R_new, saturated to P_W bits. Purely combinational.
// The split of the node processor into a global and a local unit follows
// the paper; the arithmetic is normalised min-sum, this design's choice.
module lnpu
  import ldpc_pkg::*;
(
  input  cn_state_t        state,
  input  logic [POS_W-1:0] pos,
  input  p_t               q,
  output p_t               p_new
);
  always_comb p_new = sat_p((P_W+2)'(q) + (P_W+2)'(r_msg(state, pos)));
endmodule
