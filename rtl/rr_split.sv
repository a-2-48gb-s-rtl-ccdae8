// rr_split -- distributes frames to the decoder cores round robin (step 4
// of the multi-core decoder).
//
// Blocks arrive one per handshake; the 24 blocks of a frame all go to the
// same core, the next frame to the next core, wrapping after `num_cores`
// cores (1..NCORES; the paper's main configuration uses 6). A frame waits
// until its core accepts. The round-robin order follows the paper; the
// runtime core count and handshake are this design's choice. Changing
// num_cores is meant to happen only between frames with all cores idle.
module rr_split #(
  parameter int unsigned NCORES = 6,
  parameter int unsigned W      = 810,
  parameter int unsigned BLOCKS = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        num_cores,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [W-1:0]      in_data,
  output logic [NCORES-1:0] out_valid,
  input  logic [NCORES-1:0] out_ready,
  output logic [W-1:0]      out_data,
  output logic [7:0]        cur
);
  logic [$clog2(BLOCKS)-1:0] bcnt;
  logic                      fire;

  assign out_data = in_data;
  always_comb begin
    out_valid = '0;
    in_ready  = 1'b0;
    for (int c = 0; c < NCORES; c++)
      if (cur == 8'(c)) begin
        out_valid[c] = in_valid;
        in_ready     = out_ready[c];
      end
  end
  assign fire = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bcnt <= '0; cur <= '0;
    end else if (fire) begin
      if (bcnt == ($clog2(BLOCKS))'(BLOCKS - 1)) begin
        bcnt <= '0;
        cur  <= (cur + 8'd1 >= num_cores || cur + 8'd1 >= 8'(NCORES)) ? 8'd0
                                                                      : cur + 8'd1;
      end else begin
        bcnt <= bcnt + 1'b1;
      end
    end
  end
endmodule
