// rr_join -- collects decoded frames from the cores in the same round-robin
// order in which rr_split handed them out (step 6 of the multi-core
// decoder), so frames leave in arrival order. It takes the 24 blocks of a
// frame from one core's output buffer, then moves to the next core,
// wrapping after `num_cores` cores. Combinational data path; the pointer
// advances on the handshake of a frame's last block.
module rr_join #(
  parameter int unsigned NCORES = 6,
  parameter int unsigned W      = 81,
  parameter int unsigned BLOCKS = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        num_cores,
  input  logic [NCORES-1:0] in_valid,
  output logic [NCORES-1:0] in_ready,
  input  logic [W-1:0]      in_data [NCORES],
  output logic              out_valid,
  input  logic              out_ready,
  output logic [W-1:0]      out_data,
  output logic [7:0]        cur
);
  logic [$clog2(BLOCKS)-1:0] bcnt;
  logic                      fire;

  always_comb begin
    out_valid = 1'b0;
    out_data  = '0;
    in_ready  = '0;
    for (int c = 0; c < NCORES; c++)
      if (cur == 8'(c)) begin
        out_valid   = in_valid[c];
        out_data    = in_data[c];
        in_ready[c] = out_ready;
      end
  end
  assign fire = out_valid && out_ready;

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
