// dram_unpack_tb -- feeds random DRAM words, four per block, with random
// gaps; each output block must be the low 810 bits of the four words
// concatenated (first word lowest), i.e. the 81 LLRs without padding.
module dram_unpack_tb;
  import ldpc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic rd_valid = 0, out_valid, out_ready = 1;
  logic [DRAM_W-1:0]  rd_data = '0;
  logic [Z*LLR_W-1:0] out_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dram_unpack dut (.*);

  logic [4*DRAM_W-1:0] blk [20];
  int got = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (out_data != blk[got][Z*LLR_W-1:0]) begin
      failures++; $display("FAIL: block %0d", got);
    end
    got++;
  end

  initial begin
    for (int b = 0; b < 20; b++)
      for (int k = 0; k < 4*DRAM_W/32; k++) blk[b][k*32 +: 32] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 20; b++)
      for (int w = 0; w < 4; w++) begin
        @(negedge clk);
        rd_valid = 0;
        while ($urandom % 3 == 0) @(negedge clk);
        rd_valid = 1; rd_data = blk[b][w*DRAM_W +: DRAM_W];
      end
    @(negedge clk) rd_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (got != 20) begin failures++; $display("FAIL: %0d blocks", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
