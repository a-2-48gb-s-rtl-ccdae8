// dram_unpack -- rebuilds decoder blocks from DRAM read data ("pack from
// DRAM", step 3 of the multi-core decoder).
//
// Four consecutive DRAM words (4 x 24 = 96 LLRs of 10 bits) make one padded
// block; the first 81 LLRs are kept and leave as one 810-bit block (LLR r
// in bits 10r+9:10r), the 15 pad LLRs are dropped. Read data arrives without
// back-pressure; the request side keeps the number of outstanding blocks
// within the free space of the block buffer, so out_ready is expected high
// whenever a block completes (an assertion checks it). Timing: the block
// is presented the cycle after its fourth DRAM word arrives.
module dram_unpack
  import ldpc_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                rd_valid,
  input  logic [DRAM_W-1:0]   rd_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [Z*LLR_W-1:0]  out_data
);
  logic [1:0]                                  wcnt;
  logic [DRAM_WORDS_PER_BLOCK*DRAM_W-1:0]      acc;
  logic [DRAM_WORDS_PER_BLOCK*DRAM_W-1:0]      nxt;

  assign nxt = {rd_data, acc[DRAM_WORDS_PER_BLOCK*DRAM_W-1:DRAM_W]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt <= '0; acc <= '0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (rd_valid) begin
        acc  <= nxt;
        wcnt <= wcnt + 1'b1;
        if (wcnt == 2'd3) begin
          out_valid <= 1'b1;
          out_data  <= nxt[Z*LLR_W-1:0];
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid |-> out_ready)
    else $error("dram_unpack: block buffer full while a block arrives");
endmodule
