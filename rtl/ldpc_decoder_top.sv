// ldpc_decoder_top -- multi-core QC-LDPC decoder: host stream in, DRAM
// staging, NCORES decoder cores in round robin, host stream out.
//
// Data flow (the seven steps of the paper's top-level diagram):
//  1. dma2dram_pack  host-to-target words (3 LLRs each) -> padded DRAM words
//  2. dram_req_gen   read requests for stored blocks, gated by stop_decode,
//                    the return manager and the block buffer's free space
//  3. dram_unpack    DRAM words -> 810-bit blocks -> block buffer (sync_fifo)
//  4. rr_split       whole frames to the cores in round-robin order
//  5. ldpc_core x N  fixed-latency decoding, each followed by an 81-bit
//                    hard-decision buffer (sync_fifo) holding a frame
//  6. rr_join        frames collected in the same round-robin order
//  7. hd_serializer  81-bit blocks -> two 64-bit target-to-host words;
//                    dma_return_mgr counts blocks en route
// The DMA engines and the DRAM are outside: their handshakes are ports.
// DRAM reads return in request order with any latency and no
// back-pressure. num_cores (1..NCORES) selects how many cores take part;
// it should change only while the decoder is empty. The partition into
// these steps and the six-core count follow the paper; all handshakes,
// buffer depths and the flow-control rules are this design's choices.
module ldpc_decoder_top
  import ldpc_pkg::*;
#(
  parameter int unsigned NCORES    = 6,
  parameter int unsigned MAX_ITER  = 7,
  parameter int unsigned BUF_DEPTH = 32,   // 810-bit block buffer
  parameter int unsigned OUT_DEPTH = 32    // 81-bit buffer per core
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic [7:0]        num_cores,
  input  logic              stop_decode,
  input  logic [15:0]       retrieval_rate,
  output logic [31:0]       dram_words,
  output logic [31:0]       blocks_en_route,
  // host-to-target DMA
  input  logic              h2t_valid,
  output logic              h2t_ready,
  input  logic [DMA_W-1:0]  h2t_data,
  // DRAM write
  output logic              dram_wr_valid,
  input  logic              dram_wr_ready,
  output logic [31:0]       dram_wr_addr,
  output logic [DRAM_W-1:0] dram_wr_data,
  // DRAM read
  output logic              dram_rd_valid,
  input  logic              dram_rd_ready,
  output logic [31:0]       dram_rd_addr,
  input  logic              dram_rdata_valid,
  input  logic [DRAM_W-1:0] dram_rdata,
  // target-to-host DMA
  output logic              t2h_valid,
  input  logic              t2h_ready,
  output logic [UP_W-1:0]   t2h_data,
  // status
  output logic [NCORES-1:0] core_busy,
  output logic [NCORES-1:0] core_hazard_stall
);
  localparam int unsigned BLK_W = Z * LLR_W;
  localparam int unsigned CW    = $clog2(BUF_DEPTH + 1);

  // ---- steps 1-3: staging through DRAM -----------------------------------
  logic              permit, blk_req, blk_ret;
  logic              up_valid, up_ready;
  logic [BLK_W-1:0]  up_data;
  logic              bb_valid, bb_ready;
  logic [BLK_W-1:0]  bb_data;
  logic [CW-1:0]     bb_count;

  dma2dram_pack u_pack (
    .clk, .rst_n, .in_valid(h2t_valid), .in_ready(h2t_ready),
    .in_data(h2t_data), .wr_valid(dram_wr_valid), .wr_ready(dram_wr_ready),
    .wr_addr(dram_wr_addr), .wr_data(dram_wr_data), .dram_words(dram_words));

  dram_req_gen #(.BUF_DEPTH(BUF_DEPTH)) u_req (
    .clk, .rst_n, .dram_words(dram_words), .stop_decode(stop_decode),
    .permit(permit), .buf_free(CW'(BUF_DEPTH) - bb_count),
    .blk_delivered(up_valid && up_ready), .rd_valid(dram_rd_valid),
    .rd_ready(dram_rd_ready), .rd_addr(dram_rd_addr), .blk_req(blk_req));

  dram_unpack u_unpack (
    .clk, .rst_n, .rd_valid(dram_rdata_valid), .rd_data(dram_rdata),
    .out_valid(up_valid), .out_ready(up_ready), .out_data(up_data));

  sync_fifo #(.W(BLK_W), .DEPTH(BUF_DEPTH)) u_blkbuf (
    .clk, .rst_n, .in_valid(up_valid), .in_ready(up_ready), .in_data(up_data),
    .out_valid(bb_valid), .out_ready(bb_ready), .out_data(bb_data),
    .count(bb_count));

  // ---- step 4: round-robin split -------------------------------------
  logic [NCORES-1:0] cin_valid, cin_ready;
  logic [BLK_W-1:0]  cin_data;
  logic [7:0]        split_cur, join_cur;

  rr_split #(.NCORES(NCORES), .W(BLK_W), .BLOCKS(NB)) u_split (
    .clk, .rst_n, .num_cores, .in_valid(bb_valid), .in_ready(bb_ready),
    .in_data(bb_data), .out_valid(cin_valid), .out_ready(cin_ready),
    .out_data(cin_data), .cur(split_cur));

  llr_t cin_llr [Z];
  always_comb for (int r = 0; r < Z; r++) cin_llr[r] = cin_data[r*LLR_W +: LLR_W];

  // ---- step 5: decoder cores and their output buffers ---------------
  logic [NCORES-1:0] ob_valid, ob_ready;
  logic [Z-1:0]      ob_data [NCORES];

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    logic         co_valid, co_ready, co_last, co_hand;
    logic [Z-1:0] co_hd;
    ldpc_core #(.MAX_ITER(MAX_ITER)) u_core (
      .clk, .rst_n, .in_valid(cin_valid[c]), .in_ready(cin_ready[c]),
      .in_llr(cin_llr), .out_valid(co_valid), .out_ready(co_ready),
      .out_hd(co_hd), .out_last(co_last), .busy(core_busy[c]),
      .hazard_stall(core_hazard_stall[c]), .handoff_stall(co_hand));
    sync_fifo #(.W(Z), .DEPTH(OUT_DEPTH)) u_obuf (
      .clk, .rst_n, .in_valid(co_valid), .in_ready(co_ready), .in_data(co_hd),
      .out_valid(ob_valid[c]), .out_ready(ob_ready[c]), .out_data(ob_data[c]),
      .count());
  end

  // ---- steps 6-7: round-robin join, serialise, return ----------------
  logic         j_valid, j_ready;
  logic [Z-1:0] j_data;

  rr_join #(.NCORES(NCORES), .W(Z), .BLOCKS(NB)) u_join (
    .clk, .rst_n, .num_cores, .in_valid(ob_valid), .in_ready(ob_ready),
    .in_data(ob_data), .out_valid(j_valid), .out_ready(j_ready),
    .out_data(j_data), .cur(join_cur));

  hd_serializer u_ser (
    .clk, .rst_n, .in_valid(j_valid), .in_ready(j_ready), .in_data(j_data),
    .out_valid(t2h_valid), .out_ready(t2h_ready), .out_data(t2h_data),
    .blk_done(blk_ret));

  dma_return_mgr u_ret (
    .clk, .rst_n, .blk_req(blk_req), .blk_ret(blk_ret),
    .retrieval_rate(retrieval_rate), .blocks_en_route(blocks_en_route),
    .permit(permit));
endmodule
