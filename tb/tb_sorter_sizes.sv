// tb_sorter_sizes: both proposed sorting networks at every list size of the
// synthesis comparison, L = 2, 4, 8, 16 and 32 with 8-bit metrics. Each of
// the ten networks sorts 300 random structured lists, checked against a full
// reference sort, and the CAS and stage counts of both networks are checked
// against their closed forms for each L: pruned bitonic
// (L/2-1) log L (log L+2) + 1 units in (log L+1)(log L+2)/2 - 1 stages,
// simplified bubble L(L-1)/2 units in L-1 stages. The stage counts also
// reproduce which network is shallower: bubble for L <= 8, bitonic for
// L >= 16.
module tb_sorter_sizes;
  import sorter_pkg::*;

  int checks = 0, failures = 0;
  logic start = 1'b0;
  logic [9:0] done;
  int c [10], f [10];

  sorter_harness #(.L(2),  .ARCH(PRUNED_BITONIC),    .N(300), .SEED(31)) b2  (start, done[0], c[0], f[0]);
  sorter_harness #(.L(4),  .ARCH(PRUNED_BITONIC),    .N(300), .SEED(32)) b4  (start, done[1], c[1], f[1]);
  sorter_harness #(.L(8),  .ARCH(PRUNED_BITONIC),    .N(300), .SEED(33)) b8  (start, done[2], c[2], f[2]);
  sorter_harness #(.L(16), .ARCH(PRUNED_BITONIC),    .N(300), .SEED(34)) b16 (start, done[3], c[3], f[3]);
  sorter_harness #(.L(32), .ARCH(PRUNED_BITONIC),    .N(300), .SEED(35)) b32 (start, done[4], c[4], f[4]);
  sorter_harness #(.L(2),  .ARCH(SIMPLIFIED_BUBBLE), .N(300), .SEED(41)) u2  (start, done[5], c[5], f[5]);
  sorter_harness #(.L(4),  .ARCH(SIMPLIFIED_BUBBLE), .N(300), .SEED(42)) u4  (start, done[6], c[6], f[6]);
  sorter_harness #(.L(8),  .ARCH(SIMPLIFIED_BUBBLE), .N(300), .SEED(43)) u8  (start, done[7], c[7], f[7]);
  sorter_harness #(.L(16), .ARCH(SIMPLIFIED_BUBBLE), .N(300), .SEED(44)) u16 (start, done[8], c[8], f[8]);
  sorter_harness #(.L(32), .ARCH(SIMPLIFIED_BUBBLE), .N(300), .SEED(45)) u32 (start, done[9], c[9], f[9]);

  task automatic check_eq(string what, int got, int want);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  initial begin
    for (int n = 1; n <= 5; n++) begin
      int l, cb;
      l = 1 << n;
      cb = 0;
      for (int t = 1; t < l; t++)
        for (int i = 0; i < 2 * l; i++) cb += int'(bub_lower(l, t, i));
      check_eq($sformatf("bitonic CAS L=%0d", l), pbt_num_cas(l), (l / 2 - 1) * n * (n + 2) + 1);
      check_eq($sformatf("bitonic stages L=%0d", l), pbt_num_stages(l), ((n + 1) * (n + 2)) / 2 - 1);
      check_eq($sformatf("bubble CAS L=%0d", l), cb, l * (l - 1) / 2);
      check_eq($sformatf("bubble shallower L=%0d", l), int'(l - 1 < pbt_num_stages(l)), int'(l <= 8));
      $display("L=%2d  pruned bitonic: %4d CAS, %2d stages   simplified bubble: %4d CAS, %2d stages",
               l, pbt_num_cas(l), pbt_num_stages(l), cb, l - 1);
    end
    start = 1'b1;
    wait (&done);
    for (int h = 0; h < 10; h++) begin
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
