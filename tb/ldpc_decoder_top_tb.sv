// ldpc_decoder_top_tb -- end-to-end test of the multi-core decoder at its
// default size (6 cores, 7 iterations), with a behavioural DRAM.
//
// Phase A (throughput): 12 noisy frames are written to DRAM while
//   stop_decode holds the read side; then decoding is released and the
//   steady-state frame rate is measured from the return stream (frames
//   6..11 against frames 0..5) and must reach the 2476 Mb/s of six cores
//   at 200 MHz, within 5 %.
// Phase B (mode switch and flow control): num_cores is switched to 3, the
//   in-flight limit (retrieval_rate) is set to 40 blocks, 6 frames are
//   streamed while host and DMA apply back-pressure and stop_decode pulses.
// Every returned frame is compared bit for bit with the reference decoder
//   of ldpc_tb_pkg and must come back in order. The mechanisms counted and
//   required to happen at least once: hazard stall in a core, every core
//   used, stop_decode pausing requests, in-flight limit reached, block
//   buffer full, core count switch, target-to-host back-pressure.
module ldpc_decoder_top_tb;
  import ldpc_pkg::*;
  import ldpc_tb_pkg::*;

  localparam int NC = 6, ITERS = 7;
  localparam int FA = 12, FB = 6, NF = FA + FB;

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;   // 200 MHz

  logic [7:0]  num_cores = 8'd6;
  logic        stop_decode = 1;
  logic [15:0] retrieval_rate = 16'd1000;
  logic [31:0] dram_words, blocks_en_route;
  logic        h2t_valid = 0, h2t_ready;
  logic [DMA_W-1:0] h2t_data = '0;
  logic        dram_wr_valid, dram_wr_ready, dram_rd_valid, dram_rd_ready, dram_rdata_valid;
  logic [31:0] dram_wr_addr, dram_rd_addr;
  logic [DRAM_W-1:0] dram_wr_data, dram_rdata;
  logic        t2h_valid, t2h_ready = 0;
  logic [UP_W-1:0] t2h_data;
  logic [NC-1:0] core_busy, core_hazard_stall;

  ldpc_decoder_top dut (.*);

  dram_model #(.WORDS(4096), .LATENCY(12)) u_dram (
    .clk, .wr_valid(dram_wr_valid), .wr_ready(dram_wr_ready),
    .wr_addr(dram_wr_addr), .wr_data(dram_wr_data), .rd_valid(dram_rd_valid),
    .rd_ready(dram_rd_ready), .rd_addr(dram_rd_addr),
    .rdata_valid(dram_rdata_valid), .rdata(dram_rdata));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- stimulus and expected results -------------------------------
  llrv_t llrs [NF];
  cw_t   refs [NF], cws [NF];

  // ---- mechanism counters -------------------------------------------
  longint cyc = 0;
  int n_hazard = 0, n_stop_pause = 0, n_limit = 0, n_buf_full = 0;
  int n_t2h_bp = 0, n_switch = 0;
  int used [NC];
  bit throttle = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (|core_hazard_stall) n_hazard++;
    for (int c = 0; c < NC; c++) if (core_busy[c]) used[c]++;
    if (stop_decode && dram_words >= dram_rd_addr + 4 && !dram_rd_valid) n_stop_pause++;
    if (blocks_en_route >= 32'(retrieval_rate)) n_limit++;
    if (dut.bb_count == ($bits(dut.bb_count))'(32)) n_buf_full++;
    if (t2h_valid && !t2h_ready) n_t2h_bp++;
  end
  always @(negedge clk) t2h_ready = throttle ? ($urandom % 3 == 0) : 1'b1;

  // ---- return stream ------------------------------------------------
  logic [UP_W-1:0] words [$];
  int     got_frames = 0;
  longint t_done [NF];
  always @(posedge clk) if (rst_n && t2h_valid && t2h_ready) begin
    words.push_back(t2h_data);
    if (words.size() == 2 * NB) begin
      cw_t hw;
      int  diff;
      bit  pad_ok;
      pad_ok = 1;
      for (int b = 0; b < NB; b++) begin
        logic [80:0] blk;
        blk = {words[2*b+1][39:0], words[2*b][40:0]};
        pad_ok &= (words[2*b][63:41] == '0) && (words[2*b+1][63:40] == '0);
        for (int r = 0; r < Z; r++) hw[b*Z + r] = blk[r];
      end
      diff = 0;
      for (int i = 0; i < N; i++) diff += (hw[i] != refs[got_frames][i]);
      check(diff == 0, $sformatf("frame %0d equals reference (%0d bits differ)", got_frames, diff));
      check(pad_ok, "zero padding of return words");
      t_done[got_frames] = cyc;
      got_frames++;
      words.delete();
    end
  end

  task automatic send_frame(input int f, input bit gaps);
    for (int b = 0; b < NB; b++)
      for (int w = 0; w < DMA_WORDS_PER_BLOCK; w++) begin
        @(negedge clk);
        if (gaps) while ($urandom % 4 == 0) @(negedge clk);
        h2t_valid = 1;
        for (int k = 0; k < 3; k++)
          h2t_data[k*LLR_W +: LLR_W] = LLR_W'(llrs[f][b*Z + w*3 + k]);
        @(posedge clk);
        while (!h2t_ready) @(posedge clk);
        @(negedge clk) h2t_valid = 0;
      end
  endtask

  initial begin
    bit info [K];
    for (int f = 0; f < NF; f++) begin
      for (int i = 0; i < K; i++) info[i] = bit'($urandom % 2);
      encode(info, cws[f]);
      channel(cws[f], 16.0, (f % 3 == 2) ? 15.0 : 11.0, llrs[f]);
      ref_decode(llrs[f], ITERS, refs[f]);
    end
    for (int c = 0; c < NC; c++) used[c] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // Phase A: stage 12 frames, then release
    for (int f = 0; f < FA; f++) send_frame(f, 1'b0);
    repeat (200) @(posedge clk);
    check(dram_words == 32'(FA * 96), "96 DRAM words per frame staged");
    check(dram_rd_addr == 0, "nothing read while stop_decode");
    @(negedge clk) stop_decode = 0;
    wait (got_frames == FA);
    begin
      real mbps;
      mbps = 6.0 * N / real'(t_done[FA-1] - t_done[NC-1]) * 200.0;
      $display("steady-state throughput with 6 cores: %0.1f Mb/s (%0d cycles per 6 frames)",
               mbps, t_done[FA-1] - t_done[NC-1]);
      check(mbps >= 2476.0 * 0.95, "six-core throughput near 2476 Mb/s");
    end
    for (int c = 0; c < NC; c++) check(used[c] > 0, $sformatf("core %0d used", c));

    // Phase B: three cores, in-flight limit, stop pulses, back-pressure
    @(negedge clk);
    num_cores = 8'd3; n_switch++;
    retrieval_rate = 16'd40;
    throttle = 1;
    fork
      for (int f = FA; f < NF; f++) send_frame(f, 1'b1);
      begin
        repeat (3000) @(negedge clk);
        stop_decode = 1;
        repeat (1500) @(negedge clk);
        stop_decode = 0;
      end
    join
    wait (got_frames == NF);
    repeat (20) @(posedge clk);
    check(blocks_en_route == 0, "no blocks left en route");

    $display("mechanisms: hazard-stall cycles %0d, stop pauses %0d, in-flight limit %0d, block buffer full %0d, t2h back-pressure %0d, core-count switches %0d",
             n_hazard, n_stop_pause, n_limit, n_buf_full, n_t2h_bp, n_switch);
    check(n_hazard > 0, "hazard stall happened");
    check(n_stop_pause > 0, "stop_decode paused DRAM requests");
    check(n_limit > 0, "in-flight limit reached");
    check(n_buf_full > 0, "block buffer filled");
    check(n_t2h_bp > 0, "target-to-host back-pressure");
    check(n_switch > 0, "core count switched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
