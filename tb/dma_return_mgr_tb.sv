// dma_return_mgr_tb -- random request and return pulses (returns only for
// blocks in flight) and a changing limit; checks blocks_en_route against a
// counter kept here and permit = (en route < retrieval_rate).
module dma_return_mgr_tb;
  logic clk = 0, rst_n = 0, blk_req = 0, blk_ret = 0, permit;
  logic [15:0] retrieval_rate = 16'd5;
  logic [31:0] blocks_en_route;
  int checks = 0, failures = 0, model = 0;
  always #5 clk = ~clk;

  dma_return_mgr dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      checks += 2;
      if (blocks_en_route != 32'(model)) begin failures++; $display("FAIL: en route"); end
      if (permit != (model < int'(retrieval_rate))) begin failures++; $display("FAIL: permit"); end
      blk_req = permit && ($urandom % 2 == 0);
      blk_ret = (model > 0) && ($urandom % 3 == 0);
      if (t % 300 == 0) retrieval_rate = 16'($urandom % 12);
      model += int'(blk_req) - int'(blk_ret);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
