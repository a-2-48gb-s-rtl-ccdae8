// ldpc_core_tb -- self-checking test of one decoder core.
//
// Frames: one noiseless codeword, then noisy codewords at two noise levels.
// For every frame the 24 blocks of hard decisions are compared bit for bit
// with the reference layered min-sum decoder of ldpc_tb_pkg (same number
// formats, non-overlapped schedule), so the check also proves that the
// overlapped global/local schedule with its hazard stalls gives the same
// result as plain layered decoding. The noiseless and mildly noisy frames
// must also decode to the transmitted codeword. The decoding time of each
// frame is measured and must lie between MAX_ITER * 86 cycles (86 valid
// blocks per iteration, one per cycle) and MAX_ITER * 86 * 3/2, and the
// whole frame period must meet the 420 Mb/s of one core at 200 MHz.
module ldpc_core_tb;
  import ldpc_pkg::*;
  import ldpc_tb_pkg::*;

  localparam int ITERS   = 7;   // the core's default MAX_ITER
  localparam int NFRAMES = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, out_last;
  logic busy, hazard_stall, handoff_stall;
  llr_t in_llr [Z];
  logic [Z-1:0] out_hd;

  ldpc_core dut (.*);

  int checks = 0, failures = 0;
  int hazards = 0, handoffs = 0;
  longint cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (hazard_stall) hazards++;
    if (handoff_stall) handoffs++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit    info [K];
    cw_t   cw, hw, rf;
    llrv_t llr;
    longint t0, t1;
    int    diff_ref, diff_cw;
    in_valid = 0; out_ready = 0;
    foreach (in_llr[r]) in_llr[r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NFRAMES; f++) begin
      for (int i = 0; i < K; i++) info[i] = bit'($urandom % 2);
      encode(info, cw);
      check(syndrome_weight(cw) == 0, "encoder produced a codeword");
      if (f == 0) channel(cw, 40.0, 0.0, llr);
      else if (f < 4) channel(cw, 16.0, 11.0, llr);
      else channel(cw, 16.0, 17.0, llr);
      ref_decode(llr, ITERS, rf);
      // load
      for (int b = 0; b < NB; b++) begin
        @(negedge clk);
        in_valid = 1;
        for (int r = 0; r < Z; r++) in_llr[r] = llr_t'(llr[b*Z + r]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        if (b == NB - 1) t0 = cyc;
      end
      @(negedge clk) in_valid = 0;
      // unload
      out_ready = 1;
      for (int b = 0; b < NB; b++) begin
        @(posedge clk);
        while (!out_valid) @(posedge clk);
        if (b == 0) t1 = cyc;
        for (int r = 0; r < Z; r++) hw[b*Z + r] = out_hd[r];
        check(out_last == (b == NB - 1), "out_last on the 24th block only");
      end
      @(negedge clk) out_ready = 0;
      diff_ref = 0; diff_cw = 0;
      for (int i = 0; i < N; i++) begin
        diff_ref += (hw[i] != rf[i]);
        diff_cw  += (hw[i] != cw[i]);
      end
      $display("frame %0d: decode cycles %0d, bits differing from reference %0d, from codeword %0d",
               f, t1 - t0, diff_ref, diff_cw);
      check(diff_ref == 0, "hard decisions equal the reference decoder");
      if (f < 4) check(diff_cw == 0, "frame decodes to the sent codeword");
      check((t1 - t0) >= ITERS * 86 && (t1 - t0) <= ITERS * 86 * 3 / 2,
            "decode time within MAX_ITER*86 .. MAX_ITER*86*3/2 cycles");
      // 24 load + decode + 24 unload cycles per frame: 1944 bits at 200 MHz
      // must give at least 420 Mb/s, i.e. at most 925 cycles per frame.
      check((t1 - t0) + 2 * NB <= 925, "frame period meets 420 Mb/s at 200 MHz");
    end
    $display("hazard stall cycles %0d, hand-off stall cycles %0d", hazards, handoffs);
    check(hazards > 0, "hazard stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
