// gnpu -- one lane of the global node processing unit (global pass).
//
// During the global pass over a layer the lane sees, one block per cycle,
// the posterior P of its variable node and the old check-to-variable
// message R_old of that block (rebuilt by the controller from the previous
// iteration's compressed state). It forms the variable-to-check message
// Q = P - R_old (saturated, combinational output `q`) and keeps a running
// first minimum, second minimum, position of the first minimum and the
// sign of every Q of the row. `first` marks the layer's first block and
// restarts the search. The state registers update on `en`; `state` is
// the compressed check-node result (minima scaled by 3/4, normalised
// min-sum), valid the cycle after the layer's last block was taken.
// First/second minimum hand-off to the local pass follows the paper; the
// 3/4 normalisation and widths are this design's choice.
module gnpu
  import ldpc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              first,
  input  logic [POS_W-1:0]  pos,
  input  p_t                p,
  input  logic signed [P_W:0] r_old,
  output p_t                q,
  output cn_state_t         state
);
  mag_t              min1_q, min2_q, mag;
  logic [POS_W-1:0]  idx_q;
  logic [MAX_DC-1:0] sgn_q;

  always_comb begin
    q   = sat_p((P_W+2)'(p) - (P_W+2)'(r_old));
    mag = q[P_W-1] ? mag_t'(-q) : mag_t'(q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      min1_q <= '1; min2_q <= '1; idx_q <= '0; sgn_q <= '0;
    end else if (en) begin
      if (first) begin
        min1_q <= mag;
        min2_q <= '1;
        idx_q  <= pos;
        sgn_q  <= MAX_DC'(q[P_W-1]) << pos;
      end else begin
        if (mag < min1_q) begin
          min2_q <= min1_q;
          min1_q <= mag;
          idx_q  <= pos;
        end else if (mag < min2_q) begin
          min2_q <= mag;
        end
        sgn_q[pos] <= q[P_W-1];
      end
    end
  end

  always_comb begin
    state.min1 = scale_mag(min1_q);
    state.min2 = scale_mag(min2_q);
    state.idx  = idx_q;
    state.sgn  = sgn_q;
  end
endmodule
