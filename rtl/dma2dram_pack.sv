// dma2dram_pack -- packs the host-to-target DMA stream into DRAM words
// (step 1 of the multi-core decoder).
//
// The host sends each frame as 648 words of 30 bits, three 10-bit LLRs per
// word (LLR k of the word in bits 10k+9:10k), blocks of 81 LLRs in column
// order, 27 words per block. A DRAM word holds eight 30-bit words, i.e. 24
// LLRs. Each block is padded with five zero words to 32 words (96 LLRs)
// so that it fills exactly four DRAM words; a frame becomes 768 padded
// words or 96 DRAM words. Word i of a DRAM word sits in bits 30i+29:30i.
// DRAM words are written to consecutive addresses from 0; `dram_words`
// counts the words written so far. The word sizes and padding are those
// noted in the paper's top-level diagram; bit orders are this design's.
// Timing: one host word per cycle; the DRAM write is registered and the
// pad words take one cycle each.
module dma2dram_pack
  import ldpc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DMA_W-1:0]  in_data,
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [31:0]       wr_addr,
  output logic [DRAM_W-1:0] wr_data,
  output logic [31:0]       dram_words
);
  logic [4:0]        wi;      // 30-bit word index within the padded block
  logic [DRAM_W-1:0] acc;
  logic              take, pad, step;

  assign pad      = (wi >= 5'(DMA_WORDS_PER_BLOCK));
  assign in_ready = !pad && !(wr_valid && !wr_ready);
  assign take     = in_valid && in_ready;
  assign step     = take || (pad && !(wr_valid && !wr_ready));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wi <= '0; acc <= '0; wr_valid <= 1'b0; wr_addr <= '0;
      wr_data <= '0; dram_words <= '0;
    end else begin
      if (wr_valid && wr_ready) begin
        wr_valid   <= 1'b0;
        wr_addr    <= wr_addr + 1;
        dram_words <= dram_words + 1;
      end
      if (step) begin
        wi <= wi + 1'b1;   // wraps 31 -> 0
        if (wi[2:0] == 3'd7) begin
          wr_valid <= 1'b1;
          wr_data  <= {(pad ? DMA_W'(0) : in_data), acc[DRAM_W-1:DMA_W]};
        end
        acc <= {(pad ? DMA_W'(0) : in_data), acc[DRAM_W-1:DMA_W]};
      end
    end
  end
endmodule
