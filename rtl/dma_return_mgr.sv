// dma_return_mgr -- bounds the number of blocks between the DRAM read-back
// and the return DMA ("DMA return manager" of the top-level diagram).
//
// It counts blocks requested from DRAM (`blk_req`) and blocks handed to the
// target-to-host DMA (`blk_ret`); the difference is `blocks_en_route`.
// A new DRAM block request is permitted while blocks_en_route is below
// `retrieval_rate`. The paper only names this unit and its two values;
// using retrieval_rate as an in-flight limit is this design's reading.
module dma_return_mgr (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        blk_req,
  input  logic        blk_ret,
  input  logic [15:0] retrieval_rate,
  output logic [31:0] blocks_en_route,
  output logic        permit
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) blocks_en_route <= '0;
    else blocks_en_route <= blocks_en_route + (blk_req ? 32'd1 : 32'd0)
                                            - (blk_ret ? 32'd1 : 32'd0);
  end
  assign permit = blocks_en_route < 32'(retrieval_rate);
endmodule
