// gsc_harness: one general_sort_ctrl wired to one sorter, driven with N
// random lists and checked (see tb_general_sort_ctrl).
module gsc_harness
  import sorter_pkg::*;
#(
  parameter int unsigned  L    = 8,
  parameter sorter_arch_e ARCH = SIMPLIFIED_BUBBLE,
  parameter int           N    = 100
) (
  input  logic clk,
  input  logic rst_n,
  output logic fin,
  output int   checks,
  output int   failures
);
  localparam int Q = Q_DEF, TW = $clog2(2 * L);

  logic          start, busy, done;
  logic [Q-1:0]  vals [L], list_m [2*L], srt_m [L], res_m [L];
  logic [TW-1:0] list_t [2*L], srt_t [L], res_t [L];

  general_sort_ctrl #(.L(L), .Q(Q)) dut (.*);

  if (ARCH == PRUNED_BITONIC) begin : g_srt
    pruned_bitonic_sorter #(.L(L), .Q(Q)) u (.m_in(list_m), .t_in(list_t), .m_out(srt_m), .t_out(srt_t));
  end else begin : g_srt
    simplified_bubble_sorter #(.L(L), .Q(Q)) u (.m_in(list_m), .t_in(list_t), .m_out(srt_m), .t_out(srt_t));
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL L=%0d %s", L, what);
    end
  endtask

  initial begin
    int q[$], busy_cyc, lat;
    bit seen [L];
    fin = 1'b0;
    checks = 0;
    failures = 0;
    start = 1'b0;
    for (int l = 0; l < L; l++) vals[l] = '0;
    wait (rst_n);
    @(posedge clk);
    for (int n = 0; n < N; n++) begin
      q.delete();
      for (int l = 0; l < L; l++) begin
        case (n % 4)
          0: vals[l] = Q'($urandom);
          1: vals[l] = Q'($urandom % 3);                      // ties, zeros
          2: vals[l] = ($urandom % 2 == 1) ? Q'(255) : Q'($urandom);  // +inf ties
          default: vals[l] = Q'(($urandom % 2) * 255);        // only 0 and 255
        endcase
        q.push_back(int'(vals[l]));
      end
      q.sort();
      check(!busy, "idle before start");
      start <= 1'b1;
      @(posedge clk);
      start <= 1'b0;
      busy_cyc = 0;
      lat = 0;
      do begin
        @(posedge clk);
        lat++;
        if (busy) busy_cyc++;
      end while (!done && lat < 4 * L);
      check(lat == L, $sformatf("done latency %0d want %0d", lat, L));
      check(busy_cyc == L - 1, $sformatf("busy %0d cycles want %0d", busy_cyc, L - 1));
      for (int l = 0; l < L; l++) seen[l] = 1'b0;
      for (int j = 0; j < L; j++) begin
        check(int'(res_m[j]) == q[j], $sformatf("run %0d pos %0d: %0d want %0d", n, j, res_m[j], q[j]));
        check(int'(res_t[j]) < L && !seen[int'(res_t[j])] && vals[int'(res_t[j])] == res_m[j],
              $sformatf("run %0d tag %0d", n, res_t[j]));
        if (int'(res_t[j]) < L) seen[int'(res_t[j])] = 1'b1;
      end
      @(posedge clk);
      check(!done, "done is one cycle");
    end
    fin = 1'b1;
  end
endmodule
