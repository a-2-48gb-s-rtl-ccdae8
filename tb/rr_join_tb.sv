// rr_join_tb -- each of six sources offers its own sequence of frames
// (block value = global block number of a frame sent round robin) with
// random gaps; the output must be the global sequence 0,1,2,... in order.
module rr_join_tb;
  localparam int NC = 6, W = 16, BL = 24, FR = 18;
  logic clk = 0, rst_n = 0;
  logic [7:0] num_cores = 8'd6, cur;
  logic [NC-1:0] in_valid = '0, in_ready;
  logic [W-1:0] in_data [NC];
  logic out_valid, out_ready = 0;
  logic [W-1:0] out_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  rr_join #(.NCORES(NC), .W(W), .BLOCKS(BL)) dut (.*);

  int idx [NC];   // blocks consumed per source
  int expect_n = 0;

  function automatic int block_of(int c, int i);
    return ((i / BL) * NC + c) * BL + (i % BL);
  endfunction

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    for (int c = 0; c < NC; c++) begin
      in_valid[c] = (idx[c] < FR / NC * BL) && ($urandom % 3 != 0);
      in_data[c]  = W'(block_of(c, idx[c]));
    end
    out_ready = $urandom % 4 != 0;
  end
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) if (in_valid[c] && in_ready[c]) idx[c]++;
    if (out_valid && out_ready) begin
      checks++;
      if (int'(out_data) != expect_n) begin
        failures++; $display("FAIL: got %0d exp %0d", out_data, expect_n);
      end
      expect_n++;
    end
  end

  initial begin
    for (int c = 0; c < NC; c++) begin idx[c] = 0; in_data[c] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (expect_n == FR * BL);
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
