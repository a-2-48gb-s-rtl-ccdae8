// gnpu_tb -- feeds random layers of 7 or 8 (P, R_old) pairs into one GNPU
// lane and checks, per block, Q = sat(P - R_old), and after the layer the
// scaled first and second minimum of |Q|, the position of the first
// minimum (first occurrence on ties) and the sign bits, all computed here
// from the same inputs. Includes values that saturate.
module gnpu_tb;
  import ldpc_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [POS_W-1:0] pos = '0;
  p_t p = '0, q;
  logic signed [P_W:0] r_old = '0;
  cn_state_t state;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  gnpu dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int dcn;
      int m1, m2, at;
      bit [MAX_DC-1:0] sg;
      dcn = 7 + (t % 2);
      m1 = 4096; m2 = 4096; at = 0; sg = '0;
      for (int k = 0; k < dcn; k++) begin
        int pv, rv, qv, a;
        pv = int'($urandom % 4095) - 2047;
        rv = (t % 3 == 0) ? int'($urandom % 4095) - 2047 : int'($urandom % 201) - 100;
        if (t % 5 == 0) pv = int'($urandom % 41) - 20;   // near-ties
        qv = pv - rv;
        if (qv > 2047) qv = 2047;
        if (qv < -2047) qv = -2047;
        a = qv < 0 ? -qv : qv;
        sg[k] = (qv < 0);
        if (a < m1) begin m2 = m1; m1 = a; at = k; end
        else if (a < m2) m2 = a;
        @(negedge clk);
        en = 1; first = (k == 0); pos = POS_W'(k);
        p = p_t'(pv); r_old = (P_W+1)'(rv);
        #1;
        check(int'(q) == qv, $sformatf("Q t=%0d k=%0d got %0d exp %0d", t, k, q, qv));
      end
      @(negedge clk) en = 0;
      check(int'(state.min1) == m1 - m1 / 4, "scaled min1");
      check(int'(state.min2) == m2 - m2 / 4, "scaled min2");
      check(int'(state.idx) == at, "index of min1");
      check(state.sgn == sg, "sign bits");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
