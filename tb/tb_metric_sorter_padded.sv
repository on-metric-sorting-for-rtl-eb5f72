// tb_metric_sorter_padded: runs the smaller list sizes of the synthesis
// comparison (L' = 2, 4, 8, 16) on the default 32-path metric sorter.
// The unused paths l >= L' are given the metric 255 (+inf) and increment 0;
// their candidates are then never needed ahead of a real one, so the first
// L' outputs must be the L' smallest of the 2L' real candidates. Each size
// is run 60 times; values and tags (tag must point at a candidate with the
// same metric) are checked, as is the one-cycle list latency.
module tb_metric_sorter_padded;
  import sorter_pkg::*;
  localparam int L = L_DEF, Q = Q_DEF, TW = $clog2(2 * L);

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          in_valid, in_ready, in_general, out_valid, out_general, out_sat;
  logic [Q-1:0]  in_mu [L], in_a [L], out_m [L];
  logic [TW-1:0] out_t [L];

  metric_sorter dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    int mu[$], ref_q[$], cand [2*L], a, lp, lat;
    in_valid = 1'b0;
    in_general = 1'b0;
    for (int l = 0; l < L; l++) begin
      in_mu[l] = '0;
      in_a[l] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    #1;
    for (int s = 1; s <= 4; s++) begin
      lp = 1 << s;
      for (int n = 0; n < 60; n++) begin
        mu.delete();
        ref_q.delete();
        for (int l = 0; l < lp; l++) mu.push_back(int'($urandom % ((n % 2 == 1) ? 4 : 255)));
        mu.sort();
        for (int l = 0; l < L; l++) begin
          a = (l < lp) ? int'($urandom % 256) : 0;
          in_mu[l] = (l < lp) ? Q'(mu[l]) : '1;
          in_a[l] = Q'(a);
          cand[2*l] = int'(in_mu[l]);
          cand[2*l+1] = (int'(in_mu[l]) + a > 255) ? 255 : int'(in_mu[l]) + a;
          if (l < lp) begin
            ref_q.push_back(cand[2*l]);
            ref_q.push_back(cand[2*l+1]);
          end
        end
        ref_q.sort();
        in_valid = 1'b1;
        @(posedge clk);
        #1;
        in_valid = 1'b0;
        lat = 1;
        while (!out_valid && lat < 10) begin
          @(posedge clk);
          #1;
          lat++;
        end
        check(lat == 2 && !out_general, $sformatf("L'=%0d latency %0d", lp, lat));
        for (int j = 0; j < lp; j++) begin
          check(int'(out_m[j]) == ref_q[j], $sformatf("L'=%0d run %0d pos %0d: %0d want %0d",
                                                      lp, n, j, out_m[j], ref_q[j]));
          check(cand[out_t[j]] == int'(out_m[j]), $sformatf("L'=%0d tag %0d", lp, out_t[j]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
