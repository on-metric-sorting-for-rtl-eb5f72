// sorter_harness: drives one L-smallest sorter (pruned bitonic or simplified
// bubble, chosen by ARCH) with N structured candidate lists and checks each
// result against a reference computed by fully sorting the 2L values.
//
// Lists are built the way a list decoder builds them: L sorted old metrics
// mu and L non-negative increments a give m_{2l} = mu_l and
// m_{2l+1} = min(mu_l + a_l, 2^Q-1). The value ranges are varied so that
// ties, saturated sums and the all-(-inf)/all-(+inf) extremes occur. Checks
// per list: the L output metrics equal the L smallest values in ascending
// order; every output tag is a distinct input position whose metric equals
// the output metric. The harness starts when start rises and raises done
// after the last list; it needs no clock (the sorter is combinational).
module sorter_harness
  import sorter_pkg::*;
#(
  parameter int unsigned  L    = 4,
  parameter sorter_arch_e ARCH = PRUNED_BITONIC,
  parameter int           N    = 200,
  parameter int unsigned  SEED = 1
) (
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int Q  = Q_DEF;
  localparam int TW = $clog2(2 * L);

  logic [Q-1:0]  m_in  [2*L];
  logic [TW-1:0] t_in  [2*L];
  logic [Q-1:0]  m_out [L];
  logic [TW-1:0] t_out [L];

  if (ARCH == PRUNED_BITONIC) begin : g_dut
    pruned_bitonic_sorter #(.L(L), .Q(Q)) dut (.*);
  end else begin : g_dut
    simplified_bubble_sorter #(.L(L), .Q(Q)) dut (.*);
  end

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  initial begin
    int mu[$], ref_q[$], a, range_mu, range_a;
    bit seen [2*L];
    bit ok;
    done = 1'b0;
    checks = 0;
    failures = 0;
    for (int p = 0; p < 2 * L; p++) begin
      m_in[p] = '0;
      t_in[p] = TW'(p);
    end
    void'($urandom(SEED));
    wait (start);
    for (int n = 0; n < N; n++) begin
      case (n % 5)
        0: begin range_mu = 255; range_a = 255; end
        1: begin range_mu = 3;   range_a = 2;   end   // many ties
        2: begin range_mu = 255; range_a = 20;  end
        3: begin range_mu = 40;  range_a = 255; end   // saturation likely
        default: begin range_mu = 0; range_a = rnd(0, 1) * 255; end
      endcase
      mu.delete();
      for (int l = 0; l < L; l++) mu.push_back(rnd(0, range_mu));
      mu.sort();
      ref_q.delete();
      for (int l = 0; l < L; l++) begin
        a = rnd(0, range_a);
        m_in[2*l]   = Q'(mu[l]);
        m_in[2*l+1] = (mu[l] + a > 255) ? Q'(255) : Q'(mu[l] + a);
        ref_q.push_back(int'(m_in[2*l]));
        ref_q.push_back(int'(m_in[2*l+1]));
      end
      ref_q.sort();
      #1;
      for (int p = 0; p < 2 * L; p++) seen[p] = 1'b0;
      for (int j = 0; j < L; j++) begin
        checks++;
        ok = (int'(m_out[j]) == ref_q[j]) && (int'(t_out[j]) < 2 * L)
             && !seen[t_out[j]] && (m_in[t_out[j]] == m_out[j]);
        if (ok) seen[t_out[j]] = 1'b1;
        if (!ok) begin
          failures++;
          if (failures < 10)
            $display("FAIL L=%0d arch=%0d list %0d pos %0d: got %0d (tag %0d) want %0d",
                     L, ARCH, n, j, m_out[j], t_out[j], ref_q[j]);
        end
      end
    end
    done = 1'b1;
  end
endmodule
