// sync_fifo -- single-clock first-in first-out buffer with valid/ready on
// both sides. Used for the 810-bit block buffer after the DRAM read-back
// (one block of 81 ten-bit LLRs per entry) and for the 81-bit hard-decision
// buffer behind each decoder core. The paper shows these buffers only by
// their width; depth and handshake are this design's choice.
// Timing: an entry written in cycle t can be read in cycle t+1; `count`
// is the current fill level.
module sync_fifo #(
  parameter int unsigned W     = 810,
  parameter int unsigned DEPTH = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [W-1:0]             in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [W-1:0]             out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic          push, pop;

  assign in_ready  = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; count <= '0;
    end else begin
      if (push) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      if (push && !pop)      count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) if (push) mem[wptr] <= in_data;
endmodule
