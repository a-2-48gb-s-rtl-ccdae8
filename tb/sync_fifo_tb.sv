// sync_fifo_tb -- random push/pop traffic against a queue model: data order,
// count, full and empty flags, and that a full FIFO refuses data.
module sync_fifo_tb;
  localparam int W = 81, D = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];
  always #5 clk = ~clk;

  sync_fifo #(.W(W), .DEPTH(D)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit fulls = 0;
    bit do_pop, do_push;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      in_valid  = ($urandom % 100) < ((t / 500) % 2 ? 30 : 80);
      out_ready = ($urandom % 100) < ((t / 500) % 2 ? 80 : 30);
      in_data   = {$urandom, $urandom, $urandom};
      #1;
      checks += 3;
      if (count != model.size()) begin failures++; $display("FAIL: count"); end
      if (in_ready != (model.size() < D)) begin failures++; $display("FAIL: in_ready"); end
      if (out_valid != (model.size() > 0)) begin failures++; $display("FAIL: out_valid"); end
      if (out_valid) begin
        checks++;
        if (out_data != model[0]) begin failures++; $display("FAIL: data"); end
      end
      if (model.size() == D) fulls = 1;
      do_pop  = out_valid && out_ready;
      do_push = in_valid && in_ready;
      @(posedge clk);
      if (do_pop) void'(model.pop_front());
      if (do_push) model.push_back(in_data);
    end
    checks++;
    if (!fulls) begin failures++; $display("FAIL: never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
