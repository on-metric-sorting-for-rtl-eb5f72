// simplified_bubble_sorter: returns the L smallest of 2L structured candidate
// path metrics, in ascending order, with a triangular odd-even network derived
// from bubble sort.
//
// With m_{2l} <= m_{2l+2} and m_{2l} <= m_{2l+1} on the input, one round of
// bubble sort never moves an element by more than one place, and the swaps of
// a round can be decided from the values at the start of the round. Each
// round therefore becomes one stage of parallel, non-overlapping CAS units:
// odd stages compare (odd, even) wire pairs (1,2),(3,4),..., even stages
// compare (even, odd) pairs (2,3),(4,5),... . Round 1 of bubble sort is not
// needed (m_0 is already the minimum), stage t leaves wires 0..t-1 alone, and
// only stages 1..L-1 are built because after them the first L wires hold the
// L smallest values in order. A value on wire 2L-t or above at stage t cannot
// reach the first half in the remaining stages, so those CAS units are left
// out too. Stage t keeps CAS (i, i+1) for t <= i, i+1 <= 2L-1-t and i of the
// parity of t, L(L-1)/2 units in all (6 for L = 4). The wiring is given by
// sorter_pkg::bub_lower.
//
// Interface: as pruned_bitonic_sorter. For inputs that break the two rules
// the output is not specified.
//
// Timing: purely combinational, L-1 stages of one CAS each.
module simplified_bubble_sorter
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
  initial begin
    assert (L >= 2) else $fatal(1, "simplified_bubble_sorter: L must be >= 2");
  end

  for (genvar t = 1; t < L; t++) begin : g_st
    logic [Q-1:0]  mi [2*L];
    logic [TW-1:0] ti [2*L];
    logic [Q-1:0]  mo [2*L];
    logic [TW-1:0] to [2*L];

    if (t == 1) begin : g_src
      assign mi = m_in;
      assign ti = t_in;
    end else begin : g_src
      assign mi = g_st[t-1].mo;
      assign ti = g_st[t-1].to;
    end

    for (genvar i = 0; i < 2 * L; i++) begin : g_w
      if (bub_lower(L, t, i)) begin : g_cas
        cas_unit #(.Q(Q), .TW(TW)) u_cas (
          .a_m (mi[i]),   .a_t (ti[i]),
          .b_m (mi[i+1]), .b_t (ti[i+1]),
          .lo_m(mo[i]),   .lo_t(to[i]),
          .hi_m(mo[i+1]), .hi_t(to[i+1])
        );
      end else if (!(i > 0 && bub_lower(L, t, i - 1))) begin : g_pass
        assign mo[i] = mi[i];
        assign to[i] = ti[i];
      end
    end
  end

  for (genvar j = 0; j < L; j++) begin : g_out
    assign m_out[j] = g_st[L-1].mo[j];
    assign t_out[j] = g_st[L-1].to[j];
  end
endmodule
