// tb_simplified_bubble_sorter: self-checking test of the simplified bubble
// sorter.
//
// 1. Structure: for L = 2..32 the network must hold L(L-1)/2 CAS units; for
//    2L = 8 the kept CAS units must be exactly those of the reference
//    drawing: {1-2, 3-4, 5-6}, {2-3, 4-5}, {3-4}.
// 2. Function: random structured lists through sorters with L = 32 (the
//    default), 8, 4 and 2, each checked against a full reference sort.
module tb_simplified_bubble_sorter;
  import sorter_pkg::*;

  int checks = 0, failures = 0;
  logic start = 1'b0;
  logic [3:0] done;
  int c [4], f [4];

  sorter_harness #(.L(32), .ARCH(SIMPLIFIED_BUBBLE), .N(400), .SEED(21)) h32 (start, done[0], c[0], f[0]);
  sorter_harness #(.L(8),  .ARCH(SIMPLIFIED_BUBBLE), .N(400), .SEED(22)) h8  (start, done[1], c[1], f[1]);
  sorter_harness #(.L(4),  .ARCH(SIMPLIFIED_BUBBLE), .N(400), .SEED(23)) h4  (start, done[2], c[2], f[2]);
  sorter_harness #(.L(2),  .ARCH(SIMPLIFIED_BUBBLE), .N(100), .SEED(24)) h2  (start, done[3], c[3], f[3]);

  task automatic check_eq(string what, int got, int want);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  // Kept CAS pairs of the 2L = 8 network, encoded lo*8+hi, per stage 1..3.
  int fig [3][$] = '{'{10, 28, 46}, '{19, 37}, '{28}};

  initial begin
    for (int n = 1; n <= 5; n++) begin
      int l, cnt;
      l = 1 << n;
      cnt = 0;
      for (int t = 1; t < l; t++)
        for (int i = 0; i < 2 * l; i++) if (bub_lower(l, t, i)) cnt++;
      check_eq($sformatf("CAS L=%0d", l), cnt, l * (l - 1) / 2);
    end
    for (int t = 1; t <= 3; t++) begin
      int got[$];
      got.delete();
      for (int i = 0; i < 8; i++) if (bub_lower(4, t, i)) got.push_back(i * 8 + i + 1);
      check_eq($sformatf("2L=8 stage %0d CAS count", t), got.size(), fig[t-1].size());
      for (int x = 0; x < got.size() && x < fig[t-1].size(); x++)
        check_eq($sformatf("2L=8 stage %0d CAS %0d", t, x), got[x], fig[t-1][x]);
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
