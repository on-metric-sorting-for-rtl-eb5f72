// tb_pm_expand: checks candidate generation for L = 32 (default) with
// random sorted old metrics and increments, including sums that overflow the
// 8-bit range and must saturate at 255, the index tags, the saturation flag,
// and that the two ordering rules hold on every candidate list produced.
module tb_pm_expand;
  localparam int L = 32, Q = 8, TW = 6;
  int checks = 0, failures = 0, n_sat = 0;
  logic [Q-1:0]  mu [L], a [L], m [2*L];
  logic [TW-1:0] t [2*L];
  logic          sat;

  pm_expand dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    int q[$], s, want_sat;
    for (int n = 0; n < 300; n++) begin
      q.delete();
      for (int l = 0; l < L; l++) q.push_back(int'($urandom % 256));
      q.sort();
      for (int l = 0; l < L; l++) begin
        mu[l] = Q'(q[l]);
        a[l]  = (n % 3 == 0) ? Q'($urandom % 8) : Q'($urandom % 256);
      end
      #1;
      want_sat = 0;
      for (int l = 0; l < L; l++) begin
        s = int'(mu[l]) + int'(a[l]);
        if (s > 255) begin
          s = 255;
          want_sat = 1;
        end
        check(m[2*l] == mu[l], $sformatf("m[%0d]", 2 * l));
        check(int'(m[2*l+1]) == s, $sformatf("m[%0d]=%0d want %0d", 2 * l + 1, m[2*l+1], s));
        check(int'(t[2*l]) == 2 * l && int'(t[2*l+1]) == 2 * l + 1, "tags");
        check(m[2*l] <= m[2*l+1], "rule m_2l <= m_2l+1");
        if (l > 0) check(m[2*l-2] <= m[2*l], "rule m_2l <= m_2l+2");
      end
      check(int'(sat) == want_sat, "sat flag");
      n_sat += want_sat;
    end
    check(n_sat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
