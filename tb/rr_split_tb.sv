// rr_split_tb -- streams numbered blocks with random core back-pressure.
// Frame f (24 blocks) must reach core f mod num_cores only; runs with
// num_cores = 6 and then 4.
module rr_split_tb;
  localparam int NC = 6, W = 16, BL = 24;
  logic clk = 0, rst_n = 0;
  logic [7:0] num_cores = 8'd6, cur;
  logic in_valid = 0, in_ready;
  logic [W-1:0] in_data = '0, out_data;
  logic [NC-1:0] out_valid, out_ready = '0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  rr_split #(.NCORES(NC), .W(W), .BLOCKS(BL)) dut (.*);

  int seen [NC];
  int base = 0;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = NC'($urandom);
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (!$onehot0(out_valid)) begin failures++; $display("FAIL: several valid"); end
    for (int c = 0; c < NC; c++) if (out_valid[c] && out_ready[c]) begin
      int blkno;
      blkno = int'(out_data) - base;
      checks++;
      if ((blkno / BL) % int'(num_cores) != c) begin
        failures++; $display("FAIL: block %0d to core %0d", blkno, c);
      end
      seen[c]++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ph = 0; ph < 2; ph++) begin
      int frames;
      frames = ph == 0 ? 12 : 8;
      for (int i = 0; i < frames * BL; i++) begin
        @(negedge clk);
        in_valid = 1; in_data = W'(base + i);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk) in_valid = 0;
      base += frames * BL;
      num_cores = 8'd4;
    end
    checks++;
    if (seen[0] != 4*BL || seen[5] != 2*BL) begin
      failures++; $display("FAIL: counts %0d %0d", seen[0], seen[5]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
