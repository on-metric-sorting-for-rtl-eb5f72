// ms_agent: stimulus generator and scoreboard for one metric_sorter.
//
// It issues N requests, about one in five a general sort, with random idle
// gaps and runs of back-to-back list updates. List updates are built from
// sorted old metrics and non-negative increments drawn from ranges that
// produce ties and saturated sums; general sorts use random values, heavy
// ties and the codes 0 and 255 that the general-sort construction uses as
// -inf and +inf. For every result it checks mode, metrics (against a full
// reference sort), tags (distinct, pointing at a candidate or input with the
// same metric), the saturation flag and the latency (2 sampled edges after
// acceptance for a list update, L for a general sort). It also counts how
// often each mechanism was exercised: list updates, general sorts,
// back-to-back list updates, input stalls while a general sort runs,
// saturated candidates, general sorts with values tied to the -inf code and
// general sorts with several values at the +inf code. A mechanism never seen
// counts as a failure.
module ms_agent
  import sorter_pkg::*;
#(
  parameter int unsigned L = 8,
  parameter int unsigned Q = Q_DEF,
  parameter int          N = 200,
  localparam int         TW = $clog2(2 * L)
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          in_valid,
  input  logic          in_ready,
  output logic          in_general,
  output logic [Q-1:0]  in_mu [L],
  output logic [Q-1:0]  in_a  [L],
  input  logic          out_valid,
  input  logic          out_general,
  input  logic [Q-1:0]  out_m [L],
  input  logic [TW-1:0] out_t [L],
  input  logic          out_sat,
  output logic          fin,
  output int            checks,
  output int            failures
);
  typedef struct {
    bit gen;
    int cyc;
    int src [];   // candidate (list) or input (general) values
    int want [];  // expected sorted metrics
    bit sat;
  } exp_t;

  exp_t exp_q[$];
  int   cyc = 0;
  int   n_list = 0, n_gen = 0, n_b2b = 0, n_stall = 0, n_sat = 0, n_neg = 0, n_pos = 0;
  int   n_done = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL L=%0d cycle %0d: %s", L, cyc, what);
    end
  endtask

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  // Build the next request on the input ports and its expectation.
  function automatic exp_t make_req(int n);
    exp_t e;
    int q[$], mu[$], a, rm, ra, c0, c255;
    e.gen = (rnd(0, 4) == 0) || (n < 12 && n % 3 == 2);
    e.src = new[e.gen ? L : 2 * L];
    e.want = new[L];
    e.sat = 1'b0;
    if (e.gen) begin
      c0 = 0;
      c255 = 0;
      for (int l = 0; l < L; l++) begin
        case (rnd(0, 3))
          0: in_a[l] = Q'($urandom);
          1: in_a[l] = Q'($urandom % 3);
          2: in_a[l] = '1;
          default: in_a[l] = Q'($urandom % 2) * Q'(255);
        endcase
        in_mu[l] = Q'($urandom);
        e.src[l] = int'(in_a[l]);
        q.push_back(e.src[l]);
        c0 += (in_a[l] == '0);
        c255 += (in_a[l] == '1);
      end
      n_neg += (c0 > 0);
      n_pos += (c255 > 1);
    end else begin
      rm = (n % 4 == 0) ? 3 : 255;
      ra = (n % 4 == 1) ? 255 : ((n % 4 == 0) ? 2 : 60);
      for (int l = 0; l < L; l++) mu.push_back(rnd(0, rm));
      mu.sort();
      for (int l = 0; l < L; l++) begin
        a = rnd(0, ra);
        in_mu[l] = Q'(mu[l]);
        in_a[l] = Q'(a);
        e.src[2*l] = mu[l];
        e.src[2*l+1] = (mu[l] + a > 255) ? 255 : mu[l] + a;
        if (mu[l] + a > 255) e.sat = 1'b1;
        q.push_back(e.src[2*l]);
        q.push_back(e.src[2*l+1]);
      end
    end
    q.sort();
    for (int j = 0; j < L; j++) e.want[j] = q[j];
    in_general = e.gen;
    return e;
  endfunction

  // Driver.
  initial begin
    exp_t e;
    bit last_list;
    fin = 1'b0;
    checks = 0;
    failures = 0;
    in_valid = 1'b0;
    in_general = 1'b0;
    for (int l = 0; l < L; l++) begin
      in_mu[l] = '0;
      in_a[l] = '0;
    end
    wait (rst_n);
    @(posedge clk);
    #1;
    last_list = 1'b0;
    for (int n = 0; n < N; n++) begin
      // idle gap, none for most requests so list updates run back to back
      if (rnd(0, 3) == 0) begin
        in_valid = 1'b0;
        last_list = 1'b0;
        repeat (rnd(1, 3)) @(posedge clk);
        #1;
      end
      e = make_req(n);
      in_valid = 1'b1;
      @(posedge clk);
      while (!in_ready) begin
        n_stall++;
        @(posedge clk);
      end
      e.cyc = cyc;
      exp_q.push_back(e);
      if (!e.gen) begin
        n_list++;
        if (last_list) n_b2b++;
      end else n_gen++;
      last_list = !e.gen;
      #1;
    end
    in_valid = 1'b0;
    repeat (2 * L + 4) @(posedge clk);
    check(exp_q.size() == 0, $sformatf("%0d results missing", exp_q.size()));
    check(n_done == N, "all results seen");
    $display("ms_agent L=%0d: list=%0d general=%0d back-to-back=%0d stalls=%0d saturated=%0d zero-ties=%0d inf-ties=%0d",
             L, n_list, n_gen, n_b2b, n_stall, n_sat, n_neg, n_pos);
    check(n_list > 0, "list update never happened");
    check(n_gen > 0, "general sort never happened");
    check(n_b2b > 0, "back-to-back list updates never happened");
    check(n_stall > 0, "input stall never happened");
    check(n_sat > 0, "saturation never happened");
    check(n_neg > 0, "general sort with -inf ties never happened");
    check(n_pos > 0, "general sort with +inf ties never happened");
    fin = 1'b1;
  end

  // Cycle counter and scoreboard (samples before this edge's updates).
  always @(posedge clk) begin
    exp_t e;
    bit seen [];
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      if (exp_q.size() == 0) begin
        check(1'b0, "unexpected result");
      end else begin
        e = exp_q.pop_front();
        n_done++;
        check(out_general == e.gen, "mode");
        check(cyc - e.cyc == (e.gen ? L : 2), $sformatf("latency %0d", cyc - e.cyc));
        if (!e.gen) begin
          check(out_sat == e.sat, "saturation flag");
          n_sat += int'(out_sat);
        end
        seen = new[e.src.size()];
        for (int j = 0; j < L; j++) begin
          check(int'(out_m[j]) == e.want[j],
                $sformatf("gen=%0d pos %0d: %0d want %0d", e.gen, j, out_m[j], e.want[j]));
          check(int'(out_t[j]) < e.src.size() && !seen[out_t[j]]
                && e.src[out_t[j]] == int'(out_m[j]), $sformatf("tag %0d", out_t[j]));
          if (int'(out_t[j]) < e.src.size()) seen[out_t[j]] = 1'b1;
        end
      end
    end
  end
endmodule
