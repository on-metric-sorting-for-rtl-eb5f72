// pruned_bitonic_sorter: returns the L smallest of 2L structured candidate
// path metrics, in ascending order, with a pruned bitonic sorting network.
//
// The input list m_0 .. m_{2L-1} must satisfy m_{2l} <= m_{2l+2} (the old
// list is sorted) and m_{2l} <= m_{2l+1} (the increments are non-negative),
// which is what the LLR-based list decoder produces. Under these two rules a
// full 2L-input bitonic sorter does work whose result is known in advance, so
// this network leaves out:
//   * super-stage 1, whose comparisons (2l, 2l+1) are already ordered,
//   * every CAS touching wire 0 (m_0 is the global minimum and stays there),
//   * every CAS touching wire 2L-1 (m_{2L-1} is never among the L smallest),
//   * the upper-half CAS of the last log L stages, which only order the L
//     largest elements.
// What is left is (log L + 1)(log L + 2)/2 - 1 stages holding
// (L/2 - 1) log L (log L + 2) + 1 CAS units (9 units in 5 stages for L = 4).
// The network's exact wiring is described by the functions in sorter_pkg;
// the form with a mirrored first stage per super-stage (all CAS units put
// the smaller value on the lower-index wire) follows the reference drawing
// for L = 4 and is generalised here to any power-of-two L >= 2.
//
// Interface: m_in/t_in carry the 2L candidates and a free tag per candidate;
// m_out/t_out carry the L smallest and their tags. Output wire j of the
// network for j >= L is not brought out. For inputs that break the two rules
// the output is not specified.
//
// Timing: purely combinational, one pass through all stages. Every stage has
// the same depth (one CAS), so registers can be placed between any stages if
// a pipelined version is wanted; none are placed here.
module pruned_bitonic_sorter
  import sorter_pkg::*;
#(
  parameter int unsigned L  = L_DEF,
  parameter int unsigned Q  = Q_DEF,
  parameter int unsigned TW = $clog2(2 * L)
) (
  input  logic [Q-1:0]  m_in  [2*L],
  input  logic [TW-1:0] t_in  [2*L],
  output logic [Q-1:0]  m_out [L],
  output logic [TW-1:0] t_out [L]
);
  localparam int NST = pbt_num_stages(L);

  initial begin
    assert (L >= 2 && (1 << $clog2(L)) == L)
      else $fatal(1, "pruned_bitonic_sorter: L must be a power of two >= 2");
  end

  for (genvar k = 0; k < NST; k++) begin : g_st
    logic [Q-1:0]  mi [2*L];
    logic [TW-1:0] ti [2*L];
    logic [Q-1:0]  mo [2*L];
    logic [TW-1:0] to [2*L];

    if (k == 0) begin : g_src
      assign mi = m_in;
      assign ti = t_in;
    end else begin : g_src
      assign mi = g_st[k-1].mo;
      assign ti = g_st[k-1].to;
    end

    for (genvar i = 0; i < 2 * L; i++) begin : g_w
      localparam int  P    = pbt_partner(k, i);
      localparam bit  KEEP = pbt_kept(L, k, i);
      if (KEEP && i < P) begin : g_cas
        cas_unit #(.Q(Q), .TW(TW)) u_cas (
          .a_m (mi[i]), .a_t (ti[i]),
          .b_m (mi[P]), .b_t (ti[P]),
          .lo_m(mo[i]), .lo_t(to[i]),
          .hi_m(mo[P]), .hi_t(to[P])
        );
      end else if (!KEEP) begin : g_pass
        assign mo[i] = mi[i];
        assign to[i] = ti[i];
      end
    end
  end

  for (genvar j = 0; j < L; j++) begin : g_out
    assign m_out[j] = g_st[NST-1].mo[j];
    assign t_out[j] = g_st[NST-1].to[j];
  end
endmodule
