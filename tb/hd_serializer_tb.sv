// hd_serializer_tb -- random 81-bit blocks with random DMA back-pressure;
// each block must leave as two 64-bit words, bits 40:0 then bits 80:41,
// zero-padded, with blk_done on the second word.
module hd_serializer_tb;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, blk_done;
  logic [80:0] in_data = '0;
  logic [63:0] out_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  hd_serializer dut (.*);

  logic [63:0] exp_q[$];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = $urandom % 3 != 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [63:0] e;
    e = exp_q.pop_front();
    checks += 2;
    if (out_data != e) begin failures++; $display("FAIL: word %h exp %h", out_data, e); end
    if (blk_done != (exp_q.size() % 2 == 0)) begin failures++; $display("FAIL: blk_done"); end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 200; b++) begin
      logic [80:0] v;
      v = {$urandom, $urandom, $urandom};
      @(negedge clk);
      in_valid = 1; in_data = v;
      exp_q.push_back({23'b0, v[40:0]});
      exp_q.push_back({24'b0, v[80:41]});
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk) in_valid = 0;
    end
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: words left"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
