// qc_rotator_tb -- drives random lane values and every shift 0..80 through a
// read-side and a write-side rotator in series. Checks the read side
// against the block definition (check row r sees variable lane (r+s) mod z)
// and that the write side restores the original order.
module qc_rotator_tb;
  localparam int Z = 81, W = 12;
  logic [6:0]   shift;
  logic [W-1:0] din [Z], mid [Z], back [Z];
  int checks = 0, failures = 0;

  qc_rotator #(.Z(Z), .W(W), .SW(7), .DIR(1'b0)) u_rd (.shift(shift), .din(din), .dout(mid));
  qc_rotator #(.Z(Z), .W(W), .SW(7), .DIR(1'b1)) u_wr (.shift(shift), .din(mid), .dout(back));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < Z; s++) begin
      int bad_rd = 0, bad_wr = 0;
      for (int r = 0; r < Z; r++) din[r] = W'($urandom);
      shift = 7'(s);
      #1;
      for (int r = 0; r < Z; r++) begin
        if (mid[r] != din[(r + s) % Z]) bad_rd++;
        if (back[r] != din[r]) bad_wr++;
      end
      checks += 2;
      if (bad_rd != 0) begin failures++; $display("FAIL: read rotate s=%0d", s); end
      if (bad_wr != 0) begin failures++; $display("FAIL: write rotate s=%0d", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
