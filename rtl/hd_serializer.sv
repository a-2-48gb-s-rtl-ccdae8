// hd_serializer -- turns each 81-bit block of hard decisions into two 64-bit
// target-to-host DMA words ("81 to 64", step 7 of the multi-core decoder):
// bits 40:0 in the first word, bits 80:41 in the second, each zero-padded
// to 64 bits, so a frame of 24 blocks takes 48 words. The word counts are
// those noted in the paper's top-level diagram; which bits go first is this
// design's choice. Timing: the block is taken with its second word; one
// word per cycle. `blk_done` pulses when a block's second word is taken.
module hd_serializer
  import ldpc_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [Z-1:0]    in_data,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [UP_W-1:0] out_data,
  output logic            blk_done
);
  localparam int unsigned LO = (Z + 1) / 2;   // 41 bits in the first word
  logic half;   // 0: first word, 1: second word

  assign out_valid = in_valid;
  assign out_data  = half ? UP_W'(in_data[Z-1:LO]) : UP_W'(in_data[LO-1:0]);
  assign in_ready  = half && out_ready;
  assign blk_done  = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) half <= 1'b0;
    else if (out_valid && out_ready) half <= ~half;
  end
endmodule
