// sorter_pkg: constants, types and network-description functions shared by
// the metric sorter modules.
//
// The path metrics handled here are unsigned Q-bit numbers (Q = 8 in the
// reference configuration). The smallest code 0 plays the role of -infinity
// and the largest code 2^Q-1 the role of +infinity when the general-sort
// construction needs them.
//
// The two proposed sorting networks are described by pure functions of
// (L, stage, wire): they return the partner wire of a compare-and-select
// (CAS) unit and whether that CAS survives the pruning. The sorter modules
// turn these descriptions into hardware with generate loops, so the same
// functions document the exact networks:
//
//  * pruned bitonic: super-stage s = 2 .. log2(L)+1 (super-stage 1 is pruned
//    away) has s stages. Its first stage compares wire i with the mirrored
//    wire of its block of 2^s wires; the following stages are half-cleaners
//    of distance 2^(s-2) .. 1. A CAS is dropped if it touches wire 0, if it
//    touches wire 2L-1, or if it lies in the upper half (both wires >= L) of
//    a half-cleaner stage of the last super-stage.
//  * simplified bubble: stage t = 1 .. L-1 compares wires (i, i+1) for
//    i >= t, i of the parity of t, and i+1 <= 2L-1-t.
package sorter_pkg;

  // Reference configuration.
  localparam int unsigned Q_DEF = 8;   // metric width
  localparam int unsigned L_DEF = 32;  // list size

  // Which proposed sorting network a metric sorter uses.
  typedef enum logic [0:0] {
    PRUNED_BITONIC    = 1'b0,
    SIMPLIFIED_BUBBLE = 1'b1
  } sorter_arch_e;

  // Architecture the reference design picks for a list size: the pruned
  // bitonic sorter is faster and smaller at L = 32, the bubble sorter is the
  // smaller choice for L <= 16.
  function automatic sorter_arch_e default_arch(int unsigned l);
    return (l >= 32) ? PRUNED_BITONIC : SIMPLIFIED_BUBBLE;
  endfunction

  // ---------------------------------------------------------------------
  // Pruned bitonic network
  // ---------------------------------------------------------------------

  // Number of stages: (log L + 1)(log L + 2)/2 - 1.
  function automatic int pbt_num_stages(int l);
    int n;
    n = $clog2(l);
    return ((n + 1) * (n + 2)) / 2 - 1;
  endfunction

  // Super-stage (2 .. log L + 1) and stage-within-super-stage (0 .. s-1) of
  // flat stage index k (0 .. pbt_num_stages-1).
  function automatic int pbt_super(int k);
    int s, kk;
    s = 2;
    kk = k;
    while (kk >= s) begin
      kk -= s;
      s++;
    end
    return s;
  endfunction

  function automatic int pbt_sub(int k);
    int s, kk;
    s = 2;
    kk = k;
    while (kk >= s) begin
      kk -= s;
      s++;
    end
    return kk;
  endfunction

  // Partner wire of wire i in stage k of the (unpruned) bitonic network.
  function automatic int pbt_partner(int k, int i);
    int s, j, b, base, d;
    s = pbt_super(k);
    j = pbt_sub(k);
    if (j == 0) begin
      b = 1 << s;
      base = i - (i % b);
      return base + b - 1 - (i - base);
    end
    d = 1 << (s - 1 - j);
    return i ^ d;
  endfunction

  // 1 if the CAS joining wire i to its partner in stage k is kept.
  function automatic bit pbt_kept(int l, int k, int i);
    int p, lo, hi, n;
    n = $clog2(l);
    p = pbt_partner(k, i);
    lo = (i < p) ? i : p;
    hi = (i < p) ? p : i;
    if (lo == 0) return 1'b0;                  // m_0 is the global minimum
    if (hi == 2 * l - 1) return 1'b0;          // m_{2L-1} never among the L smallest
    if (pbt_super(k) == n + 1 && pbt_sub(k) > 0 && lo >= l)
      return 1'b0;                             // sorts only the L largest
    return 1'b1;
  endfunction

  // Number of CAS units kept (equals (L/2-1) log L (log L + 2) + 1).
  function automatic int pbt_num_cas(int l);
    int c;
    c = 0;
    for (int k = 0; k < pbt_num_stages(l); k++)
      for (int i = 0; i < 2 * l; i++)
        if (pbt_kept(l, k, i) && i < pbt_partner(k, i)) c++;
    return c;
  endfunction

  // ---------------------------------------------------------------------
  // Simplified bubble network
  // ---------------------------------------------------------------------

  // 1 if wire i is the lower wire of a kept CAS (i, i+1) in stage t.
  function automatic bit bub_lower(int l, int t, int i);
    return (i >= t) && ((i % 2) == (t % 2)) && (i + 1 <= 2 * l - 1 - t);
  endfunction

endpackage
