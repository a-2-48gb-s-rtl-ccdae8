// dma2dram_pack_tb -- sends two frames of random 30-bit host words (648 per
// frame) with random gaps and random DRAM back-pressure. Expected DRAM words
// are assembled here: per block, 27 host words plus 5 zero words, eight per
// DRAM word (first word in the low bits), addresses counting from 0.
// Checks data, address, the dram_words count, and 96 DRAM words per frame.
module dma2dram_pack_tb;
  import ldpc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, wr_valid, wr_ready = 0;
  logic [DMA_W-1:0]  in_data = '0;
  logic [31:0]       wr_addr, dram_words;
  logic [DRAM_W-1:0] wr_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dma2dram_pack dut (.*);

  localparam int FR = 2;
  logic [DMA_W-1:0]  words [FR*648];
  logic [DRAM_W-1:0] exp_dram [FR*96];
  int got = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DRAM side: random ready, collect and compare
  always @(negedge clk) wr_ready <= ($urandom % 3) != 0;
  always @(posedge clk) if (rst_n && wr_valid && wr_ready) begin
    check(wr_data == exp_dram[got], $sformatf("DRAM word %0d data", got));
    check(wr_addr == 32'(got), $sformatf("DRAM word %0d address", got));
    check(dram_words == 32'(got), "dram_words count");
    got++;
  end

  initial begin
    for (int i = 0; i < FR*648; i++) words[i] = DMA_W'($urandom);
    for (int b = 0; b < FR*24; b++)
      for (int w = 0; w < 32; w++) begin
        logic [DMA_W-1:0] v;
        v = (w < 27) ? words[b*27 + w] : '0;
        exp_dram[b*4 + w/8][(w%8)*DMA_W +: DMA_W] = v;
      end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < FR*648; i++) begin
      @(negedge clk);
      while ($urandom % 4 == 0) @(negedge clk);
      in_valid = 1; in_data = words[i];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk) in_valid = 0;
    end
    repeat (50) @(posedge clk);
    check(got == FR*96, $sformatf("96 DRAM words per frame (got %0d)", got));
    check(dram_words == 32'(FR*96), "final dram_words");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
