// ldpc_ber_tb -- bit-error-rate sweep of one decoder core over Eb/N0, the
// evaluation plotted for the six-core decoder (every core is identical, so
// one core gives the same error rate). BPSK with amplitude 16 LLR units
// and Gaussian noise of sigma = 16 / sqrt(2 * R * Eb/N0), R = 1/2. For
// each point FRAMES random codewords are decoded and the information-bit
// error rate is reported next to uncoded BPSK. Checks: above 1 dB the coded
// error rate is below that of uncoded BPSK at the same Eb/N0, and the error
// rate does not rise with Eb/N0. A few tens of frames per point cannot
// resolve rates below about 1e-5; the sweep shows the waterfall region.
module ldpc_ber_tb;
  import ldpc_pkg::*;
  import ldpc_tb_pkg::*;

  localparam int FRAMES = 150;
  localparam int NPTS   = 5;
  localparam real EBN0_DB [NPTS] = '{0.5, 1.0, 1.5, 2.0, 2.5};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, out_last;
  logic busy, hazard_stall, handoff_stall;
  llr_t in_llr [Z];
  logic [Z-1:0] out_hd;

  ldpc_core dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (FRAMES * NPTS * 1200 + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Q-function approximation for the uncoded BPSK error rate.
  function automatic real q_func(input real x);
    real t;
    t = 1.0 / (1.0 + 0.2316419 * x);
    return 0.3989423 * $exp(-x * x / 2.0) *
           t * (0.319381530 + t * (-0.356563782 + t * (1.781477937 +
           t * (-1.821255978 + t * 1.330274429))));
  endfunction

  initial begin
    bit    info [K];
    cw_t   cw, hw;
    llrv_t llr;
    real   ber [NPTS];
    in_valid = 0; out_ready = 0;
    foreach (in_llr[r]) in_llr[r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NPTS; p++) begin
      real ebn0, sigma, unc;
      longint errs;
      ebn0  = 10.0 ** (EBN0_DB[p] / 10.0);
      sigma = 16.0 / $sqrt(2.0 * 0.5 * ebn0);
      unc   = q_func($sqrt(2.0 * ebn0));
      errs  = 0;
      for (int f = 0; f < FRAMES; f++) begin
        for (int i = 0; i < K; i++) info[i] = bit'($urandom % 2);
        encode(info, cw);
        channel(cw, 16.0, sigma, llr);
        for (int b = 0; b < NB; b++) begin
          @(negedge clk);
          in_valid = 1;
          for (int r = 0; r < Z; r++) in_llr[r] = llr_t'(llr[b*Z + r]);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
        end
        @(negedge clk) in_valid = 0;
        out_ready = 1;
        for (int b = 0; b < NB; b++) begin
          @(posedge clk);
          while (!out_valid) @(posedge clk);
          for (int r = 0; r < Z; r++) hw[b*Z + r] = out_hd[r];
        end
        @(negedge clk) out_ready = 0;
        for (int i = 0; i < K; i++) errs += (hw[i] != cw[i]);
      end
      ber[p] = real'(errs) / real'(FRAMES * K);
      $display("Eb/N0 %0.1f dB: decoded BER %e (%0d errors in %0d bits), uncoded BPSK %e",
               EBN0_DB[p], ber[p], errs, FRAMES * K, unc);
      if (EBN0_DB[p] > 1.0) check(ber[p] < unc, "coded BER below uncoded BPSK");
      if (p > 0) check(ber[p] <= ber[p-1], "BER does not rise with Eb/N0");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
