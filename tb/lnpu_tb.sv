// lnpu_tb -- random compressed check states, positions and Q values into
// one LNPU lane; the expected posterior is worked out here: magnitude min2
// at the min1 position and min1 elsewhere, sign = XOR of the other blocks'
// signs, P = sat(Q + R).
module lnpu_tb;
  import ldpc_pkg::*;
  cn_state_t state;
  logic [POS_W-1:0] pos;
  p_t q, p_new;
  int checks = 0, failures = 0;

  lnpu dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int m1, m2, ix, ps, qv, mag, r, e;
      bit [MAX_DC-1:0] sg;
      bit s;
      m1 = int'($urandom % 1536); m2 = m1 + int'($urandom % 200);
      if (m2 > 2047) m2 = 2047;
      ix = int'($urandom % 8); ps = int'($urandom % 8);
      sg = MAX_DC'($urandom);
      qv = int'($urandom % 4095) - 2047;
      state.min1 = mag_t'(m1); state.min2 = mag_t'(m2);
      state.idx = POS_W'(ix); state.sgn = sg;
      pos = POS_W'(ps); q = p_t'(qv);
      #1;
      mag = (ps == ix) ? m2 : m1;
      s = 0;
      for (int k = 0; k < MAX_DC; k++) if (k != ps) s ^= sg[k];
      r = s ? -mag : mag;
      e = qv + r;
      if (e > 2047) e = 2047;
      if (e < -2047) e = -2047;
      checks++;
      if (int'(p_new) != e) begin
        failures++;
        $display("FAIL: t=%0d got %0d exp %0d", t, p_new, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
