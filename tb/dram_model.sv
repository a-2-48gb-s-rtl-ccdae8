// dram_model -- behavioural model of the external DRAM and its controller
// as seen by the decoder top (not synthesizable, testbench only). Writes
// are taken when wr_ready is high; read requests are taken when rd_ready is
// high and return in order LATENCY cycles later, one word per cycle, with
// no back-pressure. Both ready signals drop at random to model a busy
// controller. Unwritten words read as zero.
module dram_model #(
  parameter int WORDS   = 4096,
  parameter int LATENCY = 12
) (
  input  logic         clk,
  input  logic         wr_valid,
  output logic         wr_ready,
  input  logic [31:0]  wr_addr,
  input  logic [239:0] wr_data,
  input  logic         rd_valid,
  output logic         rd_ready,
  input  logic [31:0]  rd_addr,
  output logic         rdata_valid,
  output logic [239:0] rdata
);
  logic [239:0] mem [WORDS];
  longint       now = 0;
  longint       due [$];
  int unsigned  adr [$];

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
    wr_ready = 0; rd_ready = 0; rdata_valid = 0; rdata = '0;
  end

  always @(posedge clk) begin
    now++;
    if (wr_valid && wr_ready) mem[wr_addr % WORDS] = wr_data;
    if (rd_valid && rd_ready) begin
      due.push_back(now + LATENCY);
      adr.push_back(rd_addr % WORDS);
    end
  end

  always @(negedge clk) begin
    wr_ready    = ($urandom % 5) != 0;
    rd_ready    = ($urandom % 5) != 0;
    rdata_valid = 0;
    if (due.size() > 0 && due[0] <= now) begin
      void'(due.pop_front());
      rdata       = mem[adr.pop_front()];
      rdata_valid = 1;
    end
  end
endmodule
