// ldpc_core -- one layered QC-LDPC decoder core ("LDPC 2x decision").
//
// What it does: receives one frame of 24 blocks of 81 channel LLRs (one
// block per cycle), runs MAX_ITER fixed iterations of layered normalised
// min-sum decoding over the 12 layers of the base matrix, then returns the
// 24 blocks of 81 hard decisions (bit = 1 for a negative posterior), one
// block per cycle. There is no early stop: the decoding latency is fixed.
//
// How it works: z = 81 lanes run in parallel, one per check row of a layer
// (the GNPU and LNPU "arrays"). Only valid blocks are visited, in the order
// of the block index / shift tables (beta_rom). Each layer is processed in
// two passes, and the two passes of consecutive layers overlap (the
// "pipelined" or 2x schedule):
//   * global pass (GNPU): per valid block, read the posterior block P,
//     rotate it onto the check rows, form Q = P - R_old, save Q in a small
//     buffer and track first/second minimum and signs;
//   * local pass (LNPU): once the layer's minima are known, per valid
//     block, rebuild R_new, write P = Q + R_new back through the inverse
//     rotation.
// The local pass of layer l runs while the global pass of layer l+1 runs.
// A scoreboard bit per block column marks a posterior that has been read by
// the global pass and not yet written back by the local pass; the global
// pass stalls on such a column (hazard stall), so results equal those of a
// plain, non-overlapped layered decoder. The global pass also waits on the
// last block of a layer if the local pass is still busy with the previous
// layer (hand-off stall). With the 802.11n z = 81 matrix the hazard stalls
// always delay the global pass enough that the hand-off stall never fires;
// it is kept as an interlock for other base matrices.
//
// Interface: in_valid/in_ready (block of LLRs, blocks in column order 0..23),
// out_valid/out_ready/out_last (hard decisions, column order). Timing:
// 24 load cycles, about 12 * (layer degree) cycles per iteration plus
// stalls, 24 unload cycles.
//
// The GNPU/LNPU split, skipping of zero blocks, and the overlapped schedule
// follow the paper. Number formats, the 3/4 normalisation, the scoreboard
// and the iteration count are this design's choices.
module ldpc_core
  import ldpc_pkg::*;
#(
  parameter int unsigned MAX_ITER = 7
) (
  input  logic            clk,
  input  logic            rst_n,
  // frame in
  input  logic            in_valid,
  output logic            in_ready,
  input  llr_t            in_llr [Z],
  // hard decisions out
  output logic            out_valid,
  input  logic            out_ready,
  output logic [Z-1:0]    out_hd,
  output logic            out_last,
  // status
  output logic            busy,
  output logic            hazard_stall,
  output logic            handoff_stall
);
  localparam int unsigned QB_DEPTH = 2 * MAX_DC;
  localparam int unsigned QB_AW    = $clog2(QB_DEPTH);
  localparam int unsigned IT_W     = $clog2(MAX_ITER + 1);

  typedef enum logic [1:0] {S_LOAD, S_DEC, S_OUT} state_e;
  state_e state;

  // ---- storage -------------------------------------------------------
  p_t        pmem [NB][Z];          // posterior LLRs, natural lane order
  cn_state_t rmem [MB][Z];          // compressed check messages per layer
  p_t        qbuf [QB_DEPTH][Z];    // Q messages, global -> local pass
  logic [NB-1:0] pending;           // read by global, not yet written back

  logic [COL_W-1:0] io_cnt;         // block counter for load/unload

  // ---- global pass state -------------------------------------------
  logic               g_active;
  logic [LAYER_W-1:0] g_layer;
  logic [POS_W-1:0]   g_pos;
  logic [IT_W-1:0]    g_iter;
  logic [QB_AW-1:0]   q_wptr, q_rptr;
  logic               h_pend;       // layer finished by GNPU last cycle
  logic [LAYER_W-1:0] h_layer;

  // ---- local pass state --------------------------------------------
  logic               l_busy;
  logic [LAYER_W-1:0] l_layer;
  logic [POS_W-1:0]   l_pos;
  cn_state_t          l_state [Z];

  beta_t            g_ent, l_ent;
  logic [POS_W:0]   g_dc, l_dc;   // layer degrees (not needed: `last` ends a layer)
  beta_rom u_grom (.layer(g_layer), .pos(g_pos), .entry(g_ent), .dc(g_dc));
  beta_rom u_lrom (.layer(l_layer), .pos(l_pos), .entry(l_ent), .dc(l_dc));

  // ---- global pass datapath ----------------------------------------
  logic [P_W-1:0] g_raw [Z], g_al [Z];
  p_t             g_q  [Z];
  cn_state_t      g_st [Z];
  logic           g_fire, l_fire, l_frees;

  always_comb for (int r = 0; r < Z; r++) g_raw[r] = pmem[g_ent.col][r];

  qc_rotator #(.Z(Z), .W(P_W), .SW(SHIFT_W), .DIR(1'b0)) u_rot_rd
    (.shift(g_ent.shift), .din(g_raw), .dout(g_al));

  for (genvar r = 0; r < Z; r++) begin : g_lane
    logic signed [P_W:0] r_old;
    assign r_old = (g_iter == '0) ? '0 : r_msg(rmem[g_layer][r], g_pos);
    gnpu u_gnpu (.clk(clk), .rst_n(rst_n), .en(g_fire), .first(g_pos == '0),
                 .pos(g_pos), .p(p_t'(g_al[r])), .r_old(r_old),
                 .q(g_q[r]), .state(g_st[r]));
  end

  assign l_fire        = l_busy;
  assign l_frees       = (!l_busy && !h_pend) || (l_busy && l_ent.last);
  assign hazard_stall  = (state == S_DEC) && g_active && pending[g_ent.col];
  assign handoff_stall = (state == S_DEC) && g_active && !pending[g_ent.col]
                         && g_ent.last && !l_frees;
  assign g_fire        = (state == S_DEC) && g_active && !hazard_stall
                         && !handoff_stall;

  // ---- local pass datapath -----------------------------------------
  logic [P_W-1:0] l_new [Z], l_wr [Z];
  for (genvar r = 0; r < Z; r++) begin : l_lane
    p_t pn;
    lnpu u_lnpu (.state(l_state[r]), .pos(l_pos), .q(qbuf[q_rptr][r]),
                 .p_new(pn));
    assign l_new[r] = pn;
  end

  qc_rotator #(.Z(Z), .W(P_W), .SW(SHIFT_W), .DIR(1'b1)) u_rot_wr
    (.shift(l_ent.shift), .din(l_new), .dout(l_wr));

  // ---- control -------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_LOAD;
      io_cnt   <= '0;
      g_active <= 1'b0;
      g_layer  <= '0;
      g_pos    <= '0;
      g_iter   <= '0;
      q_wptr   <= '0;
      q_rptr   <= '0;
      h_pend   <= 1'b0;
      h_layer  <= '0;
      l_busy   <= 1'b0;
      l_layer  <= '0;
      l_pos    <= '0;
      pending  <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          io_cnt <= io_cnt + 1'b1;
          if (io_cnt == COL_W'(NB - 1)) begin
            io_cnt   <= '0;
            state    <= S_DEC;
            g_active <= 1'b1;
            g_layer  <= '0;
            g_pos    <= '0;
            g_iter   <= '0;
          end
        end
        S_DEC: begin
          // global pass
          h_pend <= g_fire && g_ent.last;
          if (g_fire) begin
            q_wptr <= q_wptr + 1'b1;
            if (g_ent.last) begin
              g_pos   <= '0;
              h_layer <= g_layer;
              if (g_layer == LAYER_W'(MB - 1)) begin
                g_layer <= '0;
                g_iter  <= g_iter + 1'b1;
                if (g_iter == IT_W'(MAX_ITER - 1)) g_active <= 1'b0;
              end else begin
                g_layer <= g_layer + 1'b1;
              end
            end else begin
              g_pos <= g_pos + 1'b1;
            end
          end
          // local pass
          if (l_fire) begin
            q_rptr <= q_rptr + 1'b1;
            l_pos  <= l_pos + 1'b1;
            if (l_ent.last) l_busy <= 1'b0;
          end
          // hand-off of a finished layer to the local pass
          if (h_pend) begin
            l_busy  <= 1'b1;
            l_layer <= h_layer;
            l_pos   <= '0;
          end
          // scoreboard
          for (int c = 0; c < NB; c++) begin
            if (g_fire && g_ent.col == COL_W'(c))      pending[c] <= 1'b1;
            else if (l_fire && l_ent.col == COL_W'(c)) pending[c] <= 1'b0;
          end
          if (!g_active && !l_busy && !h_pend) state <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          io_cnt <= io_cnt + 1'b1;
          if (io_cnt == COL_W'(NB - 1)) begin
            io_cnt <= '0;
            state  <= S_LOAD;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // Datapath storage (no reset: every word is written before it is read).
  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid)
      for (int r = 0; r < Z; r++) pmem[io_cnt][r] <= p_t'(in_llr[r]);
    if (state == S_DEC && l_fire)
      for (int r = 0; r < Z; r++) pmem[l_ent.col][r] <= p_t'(l_wr[r]);
    if (g_fire)
      for (int r = 0; r < Z; r++) qbuf[q_wptr][r] <= g_q[r];
    if (h_pend) begin
      for (int r = 0; r < Z; r++) begin
        rmem[h_layer][r] <= g_st[r];
        l_state[r]       <= g_st[r];
      end
    end
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_OUT);
  assign out_last  = (state == S_OUT) && (io_cnt == COL_W'(NB - 1));
  assign busy      = (state != S_LOAD);
  always_comb for (int r = 0; r < Z; r++) out_hd[r] = pmem[io_cnt][r][P_W-1];

  // The global pass never runs more than one layer ahead of the local pass.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (h_pend |-> !l_busy || l_ent.last))
    else $error("ldpc_core: layer hand-off while local pass busy");
endmodule
