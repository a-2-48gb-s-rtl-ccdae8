// beta_rom_tb -- walks every layer and position of the block tables and
// checks them against a direct scan of the base matrix: the k-th entry of a
// layer must be the k-th non-negative entry of that base row, the layer
// degree must match, `last` must mark the final entry, and the tables must
// hold 86 valid blocks in all (the row degrees of the rate-1/2 code).
module beta_rom_tb;
  import ldpc_pkg::*;
  logic [LAYER_W-1:0] layer;
  logic [POS_W-1:0]   pos;
  beta_t              entry;
  logic [POS_W:0]     dc;
  int checks = 0, failures = 0;

  beta_rom dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total = 0;
    for (int l = 0; l < MB; l++) begin
      int cols[$], shs[$];
      cols.delete(); shs.delete();
      for (int c = 0; c < NB; c++)
        if (HB[l][c] != -1) begin cols.push_back(c); shs.push_back(HB[l][c]); end
      total += cols.size();
      for (int k = 0; k < cols.size(); k++) begin
        layer = LAYER_W'(l); pos = POS_W'(k);
        #1;
        check(int'(entry.col) == cols[k], $sformatf("col l=%0d k=%0d", l, k));
        check(int'(entry.shift) == shs[k], $sformatf("shift l=%0d k=%0d", l, k));
        check(entry.last == (k == cols.size() - 1), $sformatf("last l=%0d k=%0d", l, k));
        check(int'(dc) == cols.size(), $sformatf("dc l=%0d", l));
      end
    end
    check(total == 86, "86 valid blocks in the base matrix");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
