// tb_pruned_bitonic_sorter: self-checking test of the pruned bitonic sorter.
//
// 1. Structure: for L = 2..32 the stage and CAS counts of the generated
//    network must equal (log L+1)(log L+2)/2 - 1 and
//    (L/2-1) log L (log L+2) + 1; for L = 4 the kept CAS units must be
//    exactly those of the reference drawing, stage by stage:
//    {1-2, 5-6}, {2-3, 4-5}, {1-6, 2-5, 3-4}, {1-3}, {2-3}.
// 2. Function: random structured lists through sorters with L = 32 (the
//    default), 16, 4 and 2, each checked against a full reference sort.
module tb_pruned_bitonic_sorter;
  import sorter_pkg::*;

  int checks = 0, failures = 0;
  logic start = 1'b0;
  logic [3:0] done;
  int c [4], f [4];

  sorter_harness #(.L(32), .ARCH(PRUNED_BITONIC), .N(400), .SEED(11)) h32 (start, done[0], c[0], f[0]);
  sorter_harness #(.L(16), .ARCH(PRUNED_BITONIC), .N(400), .SEED(12)) h16 (start, done[1], c[1], f[1]);
  sorter_harness #(.L(4),  .ARCH(PRUNED_BITONIC), .N(400), .SEED(13)) h4  (start, done[2], c[2], f[2]);
  sorter_harness #(.L(2),  .ARCH(PRUNED_BITONIC), .N(100), .SEED(14)) h2  (start, done[3], c[3], f[3]);

  task automatic check_eq(string what, int got, int want);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  // Kept CAS pairs of the L = 4 network, encoded lo*8+hi, per stage.
  int fig [5][$] = '{'{10, 46}, '{19, 37}, '{14, 21, 28}, '{11}, '{19}};

  initial begin
    for (int n = 1; n <= 5; n++) begin
      int l;
      l = 1 << n;
      check_eq($sformatf("stages L=%0d", l), pbt_num_stages(l), ((n + 1) * (n + 2)) / 2 - 1);
      check_eq($sformatf("CAS L=%0d", l), pbt_num_cas(l), (l / 2 - 1) * n * (n + 2) + 1);
    end
    for (int k = 0; k < 5; k++) begin
      int got[$];
      got.delete();
      for (int i = 0; i < 8; i++)
        if (pbt_kept(4, k, i) && i < pbt_partner(k, i)) got.push_back(i * 8 + pbt_partner(k, i));
      check_eq($sformatf("L=4 stage %0d CAS count", k), got.size(), fig[k].size());
      for (int x = 0; x < got.size() && x < fig[k].size(); x++)
        check_eq($sformatf("L=4 stage %0d CAS %0d", k, x), got[x], fig[k][x]);
    end
    start = 1'b1;
    wait (&done);
    for (int h = 0; h < 4; h++) begin
      checks += c[h];
      failures += f[h];
    end
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
