// metric_sorter: metric sorter unit of an LLR-based successive cancellation
// list (SCL) decoder for polar codes.
//
// At every information bit the decoder keeps L paths. Each path l, with
// metric mu_l, spawns two candidates, mu_l and mu_l + a_l, and the L
// candidates with the smallest metrics survive. Because the old metrics are
// kept sorted and the penalties a_l are non-negative, the 2L candidates are
// already partly ordered, and a pruned sorting network can find the L
// smallest at about half the cost of a general sorter. This unit wraps such
// a network:
//
//   list mode    (in_general = 0): pm_expand forms the 2L candidates from
//                in_mu and in_a, the sorter returns the L smallest in order,
//                out_t gives each survivor's candidate index 2l+b (parent
//                path l, bit b).
//   general mode (in_general = 1): the L values on in_a, in any order, are
//                sorted by general_sort_ctrl, which runs the same sorter L-1
//                times in a row. The decoder needs this now and then to
//                restore a sorted list. out_t gives each value's input index.
//
// ARCH picks the network: PRUNED_BITONIC (fastest and smallest at L = 32)
// or SIMPLIFIED_BUBBLE (smaller, and with fewer stages, for L <= 8..16).
// The default follows that rule.
//
// Interface and timing (this design's choice; the sorting networks are the
// part taken from the reference description):
//   * A request is taken at a rising edge with in_valid && in_ready.
//   * List mode: inputs are registered, the combinational sorter works in
//     the next cycle and its result is registered: out_valid is high for one
//     cycle starting one cycle after acceptance. in_ready stays high, so one
//     list update per cycle is sustained.
//   * General mode: in_ready drops for L-1 cycles while the passes run
//     (one pass per cycle); out_valid and out_general are high for one
//     cycle starting L-1 cycles after acceptance.
//   * There is no output back-pressure. out_sat flags a list-mode result in
//     which some candidate metric saturated at 2^Q - 1.
//   * Asynchronous active-low reset.
//   * in_mu must be sorted (ascending) for a list update; an assertion
//     checks this at acceptance.
module metric_sorter
  import sorter_pkg::*;
#(
  parameter int unsigned  L    = L_DEF,
  parameter int unsigned  Q    = Q_DEF,
  parameter sorter_arch_e ARCH = default_arch(L),
  localparam int unsigned TW   = $clog2(2 * L)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic          in_general,
  input  logic [Q-1:0]  in_mu [L],
  input  logic [Q-1:0]  in_a  [L],
  output logic          out_valid,
  output logic          out_general,
  output logic [Q-1:0]  out_m [L],
  output logic [TW-1:0] out_t [L],
  output logic          out_sat
);
  logic accept;
  logic gen_busy, gen_done;

  assign in_ready = !gen_busy;
  assign accept   = in_valid && in_ready;

  // ---------------- list-mode input register ----------------
  logic          lst_v_q;
  logic [Q-1:0]  mu_q [L];
  logic [Q-1:0]  a_q  [L];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lst_v_q <= 1'b0;
      for (int l = 0; l < L; l++) begin
        mu_q[l] <= '0;
        a_q[l]  <= '0;
      end
    end else begin
      lst_v_q <= accept && !in_general;
      if (accept && !in_general) begin
        mu_q <= in_mu;
        a_q  <= in_a;
      end
    end
  end

  // ---------------- candidate generation ----------------
  logic [Q-1:0]  cand_m [2*L];
  logic [TW-1:0] cand_t [2*L];
  logic          cand_sat;

  pm_expand #(.L(L), .Q(Q), .TW(TW)) u_expand (
    .mu (mu_q),
    .a  (a_q),
    .m  (cand_m),
    .t  (cand_t),
    .sat(cand_sat)
  );

  // ---------------- general-sort controller ----------------
  logic [Q-1:0]  gen_m   [2*L];
  logic [TW-1:0] gen_t   [2*L];
  logic [Q-1:0]  gres_m  [L];
  logic [TW-1:0] gres_t  [L];
  logic [Q-1:0]  srt_m   [L];
  logic [TW-1:0] srt_t   [L];

  general_sort_ctrl #(.L(L), .Q(Q), .TW(TW)) u_gen (
    .clk   (clk),
    .rst_n (rst_n),
    .start (accept && in_general),
    .vals  (in_a),
    .busy  (gen_busy),
    .list_m(gen_m),
    .list_t(gen_t),
    .srt_m (srt_m),
    .srt_t (srt_t),
    .done  (gen_done),
    .res_m (gres_m),
    .res_t (gres_t)
  );

  // ---------------- shared sorter ----------------
  logic [Q-1:0]  sin_m [2*L];
  logic [TW-1:0] sin_t [2*L];

  always_comb begin
    sin_m = gen_busy ? gen_m : cand_m;
    sin_t = gen_busy ? gen_t : cand_t;
  end

  if (ARCH == PRUNED_BITONIC) begin : g_sorter
    pruned_bitonic_sorter #(.L(L), .Q(Q), .TW(TW)) u_sorter (
      .m_in (sin_m), .t_in (sin_t), .m_out(srt_m), .t_out(srt_t)
    );
  end else begin : g_sorter
    simplified_bubble_sorter #(.L(L), .Q(Q), .TW(TW)) u_sorter (
      .m_in (sin_m), .t_in (sin_t), .m_out(srt_m), .t_out(srt_t)
    );
  end

  // ---------------- list-mode output register ----------------
  logic          lres_v_q;
  logic          lres_sat_q;
  logic [Q-1:0]  lres_m_q [L];
  logic [TW-1:0] lres_t_q [L];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lres_v_q   <= 1'b0;
      lres_sat_q <= 1'b0;
      for (int l = 0; l < L; l++) begin
        lres_m_q[l] <= '0;
        lres_t_q[l] <= '0;
      end
    end else begin
      lres_v_q <= lst_v_q;
      if (lst_v_q) begin
        lres_m_q   <= srt_m;
        lres_t_q   <= srt_t;
        lres_sat_q <= cand_sat;
      end
    end
  end

  always_comb begin
    out_valid   = lres_v_q || gen_done;
    out_general = gen_done;
    out_m       = gen_done ? gres_m : lres_m_q;
    out_t       = gen_done ? gres_t : lres_t_q;
    out_sat     = !gen_done && lres_sat_q;
  end

  // A list update must bring a sorted old list (rule R1 of the networks).
  logic in_mu_sorted;
  always_comb begin
    in_mu_sorted = 1'b1;
    for (int l = 1; l < L; l++) if (in_mu[l] < in_mu[l-1]) in_mu_sorted = 1'b0;
  end


  a_sorted_in: assert property (@(posedge clk) disable iff (!rst_n)
                                (accept && !in_general) |-> in_mu_sorted)
    else $error("metric_sorter: list update with unsorted in_mu");

  // A list update never needs the sorter while the general sort owns it, and
  // the two result sources never present at once.
  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(lst_v_q && gen_busy))
    else $error("metric_sorter: sorter claimed twice");
  a_one_result: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(lres_v_q && gen_done))
    else $error("metric_sorter: two results at once");
endmodule
