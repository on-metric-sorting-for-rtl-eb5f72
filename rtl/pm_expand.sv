// pm_expand: forms the 2L candidate path metrics of one list-decoding step.
//
// Each of the L surviving paths l, with metric mu_l, splits into two
// candidates: m_{2l} = mu_l (the more likely bit, no penalty) and
// m_{2l+1} = mu_l + a_l (the less likely bit, penalty a_l >= 0). With the old
// list sorted (mu_0 <= mu_1 <= ...) the candidate list then satisfies the two
// ordering rules the pruned sorters rely on. The candidate index 2l or 2l+1
// is produced as the tag, from which the decoder recovers the parent path
// (index >> 1) and the bit (index & 1).
//
// The sum saturates at 2^Q - 1 (a design choice; the overflow behaviour is
// not part of the reference description). Saturation keeps
// m_{2l} <= m_{2l+1}, so the ordering rules still hold. sat reports that at
// least one sum was clipped.
//
// Purely combinational.
module pm_expand
  import sorter_pkg::*;
#(
  parameter int unsigned L  = L_DEF,
  parameter int unsigned Q  = Q_DEF,
  parameter int unsigned TW = $clog2(2 * L)
) (
  input  logic [Q-1:0]  mu [L],
  input  logic [Q-1:0]  a  [L],
  output logic [Q-1:0]  m  [2*L],
  output logic [TW-1:0] t  [2*L],
  output logic          sat
);
  always_comb begin
    logic [Q:0] sum;
    sat = 1'b0;
    for (int l = 0; l < L; l++) begin
      sum = {1'b0, mu[l]} + {1'b0, a[l]};
      m[2*l]   = mu[l];
      m[2*l+1] = sum[Q] ? {Q{1'b1}} : sum[Q-1:0];
      sat      = sat | sum[Q];
      t[2*l]   = TW'(2 * l);
      t[2*l+1] = TW'(2 * l + 1);
    end
  end
endmodule
