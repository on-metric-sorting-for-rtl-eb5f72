// tb_cas_unit: exhaustive-by-sampling test of the compare-and-select unit.
// Every pair of 8-bit metrics with a = b, a = b +/- 1 and 4000 random pairs
// are applied; lo must carry the smaller metric, hi the larger, and the tags
// must follow their metrics, with no swap when the metrics are equal.
module tb_cas_unit;
  localparam int Q = 8, TW = 6;
  int checks = 0, failures = 0;
  logic [Q-1:0]  a_m, b_m, lo_m, hi_m;
  logic [TW-1:0] a_t, b_t, lo_t, hi_t;

  cas_unit dut (.*);

  task automatic apply(int am, int bm);
    int elo, ehi, etlo, ethi;
    a_m = Q'(am); b_m = Q'(bm);
    a_t = TW'($urandom); b_t = TW'($urandom);
    #1;
    if (bm < am) begin
      elo = bm; ehi = am; etlo = int'(b_t); ethi = int'(a_t);
    end else begin
      elo = am; ehi = bm; etlo = int'(a_t); ethi = int'(b_t);
    end
    checks++;
    if (int'(lo_m) != elo || int'(hi_m) != ehi || int'(lo_t) != etlo || int'(hi_t) != ethi) begin
      failures++;
      if (failures < 10)
        $display("FAIL a=%0d b=%0d: lo=%0d/%0d hi=%0d/%0d", am, bm, lo_m, lo_t, hi_m, hi_t);
    end
  endtask

  initial begin
    for (int v = 0; v < 256; v++) begin
      apply(v, v);
      if (v < 255) begin
        apply(v, v + 1);
        apply(v + 1, v);
      end
    end
    for (int n = 0; n < 4000; n++) apply(int'($urandom % 256), int'($urandom % 256));
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
