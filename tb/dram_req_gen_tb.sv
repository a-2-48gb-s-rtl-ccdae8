// dram_req_gen_tb -- the DRAM write count grows in steps; a model tracks the
// credit (blocks requested but not delivered to a buffer with fixed free
// space). Checks: requests come in address order, four per block, never
// beyond the words written, never while stop_decode or !permit is set at
// block start, never more blocks outstanding than buffer space, and all
// written words are eventually requested.
module dram_req_gen_tb;
  logic clk = 0, rst_n = 0;
  logic [31:0] dram_words = 0, rd_addr;
  logic stop_decode = 0, permit = 1, blk_delivered = 0, rd_valid, rd_ready = 1, blk_req;
  logic [5:0] buf_free = 6'd3;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dram_req_gen #(.BUF_DEPTH(32)) dut (.*);

  int next_addr = 0, outstanding = 0, blocks = 0, stop_seen = 0;

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

  // delivery of blocks some cycles after their request
  always @(posedge clk) if (rst_n) begin
    if (rd_valid && rd_ready) begin
      check(rd_addr == 32'(next_addr), "address order");
      check(rd_addr < dram_words, "only written words");
      if (next_addr % 4 == 0) begin
        check(blk_req, "blk_req on first word of a block");
        check(!stop_decode && permit, "block starts only when allowed");
        if (stop_decode) stop_seen++;
        blocks++;
        outstanding++;
        check(outstanding <= 3, "outstanding within buffer space");
      end
      next_addr++;
    end
  end
  always @(negedge clk) begin
    blk_delivered = 0;
    if (outstanding > 0 && ($urandom % 8 == 0)) begin
      blk_delivered = 1;
      outstanding--;
    end
    rd_ready = ($urandom % 4) != 0;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int step = 0; step < 40; step++) begin
      @(negedge clk);
      dram_words = dram_words + 32'($urandom % 7);
      stop_decode = (step % 10) == 5;
      permit = (step % 7) != 3;
      repeat (20) @(negedge clk);
    end
    stop_decode = 0; permit = 1;
    dram_words = (dram_words / 4) * 4;
    repeat (3000) @(negedge clk);
    check(next_addr == int'(dram_words), $sformatf("all words requested (%0d of %0d)", next_addr, dram_words));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
