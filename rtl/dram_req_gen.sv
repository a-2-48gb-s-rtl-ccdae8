// dram_req_gen -- issues DRAM read requests for stored frames (step 2 of the
// multi-core decoder).
//
// It reads back, block by block, what the packer has written: a block of
// four DRAM words is requested when all four have been written
// (`dram_words`), decoding is not stopped (`stop_decode`), the return
// manager permits another block en route (`permit`), and the block buffer
// behind the DRAM has room for it counting the blocks already requested
// but not yet delivered (`buf_free`, `blk_delivered`). The four word
// requests of a block then go out on consecutive accepted cycles.
// `blk_req` pulses when a block's first word request is accepted.
// The gating by word count and stop flag follows the top-level diagram;
// the block-granular request and the credit rule are this design's.
module dram_req_gen
  import ldpc_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 32
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [31:0]                        dram_words,
  input  logic                               stop_decode,
  input  logic                               permit,
  input  logic [$clog2(BUF_DEPTH+1)-1:0]     buf_free,
  input  logic                               blk_delivered,
  output logic                               rd_valid,
  input  logic                               rd_ready,
  output logic [31:0]                        rd_addr,
  output logic                               blk_req
);
  logic [1:0]  sub;          // word within the block being requested
  logic        in_blk;
  logic [31:0] outstanding;  // blocks requested, not yet in the buffer
  logic        start;

  assign start = !in_blk && !stop_decode && permit
                 && (dram_words >= rd_addr + DRAM_WORDS_PER_BLOCK)
                 && (outstanding < 32'(buf_free));
  assign rd_valid = in_blk || start;
  assign blk_req  = start && rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sub <= '0; in_blk <= 1'b0; rd_addr <= '0; outstanding <= '0;
    end else begin
      if (rd_valid && rd_ready) begin
        rd_addr <= rd_addr + 1;
        sub     <= sub + 1'b1;
        in_blk  <= (sub != 2'd3);
      end
      outstanding <= outstanding + (blk_req ? 32'd1 : 32'd0)
                                 - (blk_delivered ? 32'd1 : 32'd0);
    end
  end
endmodule
