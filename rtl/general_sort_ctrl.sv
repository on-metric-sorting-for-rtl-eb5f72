// general_sort_ctrl: sorts L arbitrary metrics by running the structured
// L-smallest sorter L-1 times in a row.
//
// The pruned sorters only accept lists with m_{2l} <= m_{2l+2} and
// m_{2l} <= m_{2l+1}. An arbitrary set a_0 .. a_{L-1} can still be sorted
// with them: the list
//     (-inf, a_0, -inf, a_1, ..., -inf, a_{L-2}, a_{L-1}, +inf)
// obeys both rules, and its L smallest elements are L-1 copies of -inf
// followed by min(a). Each pass therefore yields the minimum of the values
// still present at sorter output L-1. The value found is then retired by
// turning its slot into +inf, which keeps the list legal, and the next pass
// finds the next smallest. After L-1 passes exactly one live slot remains; it
// holds the largest value and completes the sorted list.
//
// -inf and +inf are the codes 0 and 2^Q-1. Which slot to retire is read from
// the tags, which here are the wire positions 0..2L-1 of the constructed
// list: the first sorter output (lowest position) whose tag is a live a-slot
// is retired. Ties with the -inf code are harmless because every a-slot that
// reaches the L outputs carries the minimum value. If no live a-slot reaches
// the outputs, every remaining value equals +inf and the lowest-numbered live
// slot is retired. The retiring rule and the infinity codes are this
// design's choices.
//
// Interface: start loads vals (accepted only while busy is low). While busy,
// list_m/list_t must be routed into the sorter and its outputs returned on
// srt_m/srt_t in the same cycle (the sorter is combinational). res_m holds
// the sorted values, res_t the index (0..L-1) of each value in vals.
//
// Timing: start sampled at clock edge 0; passes at edges 1 .. L-1; done is a
// one-cycle pulse after edge L-1, with res_m/res_t valid from then until the
// next start. busy is high from edge 0 to edge L-1. Asynchronous active-low
// reset clears busy, done and the result registers.
module general_sort_ctrl
  import sorter_pkg::*;
#(
  parameter int unsigned L  = L_DEF,
  parameter int unsigned Q  = Q_DEF,
  parameter int unsigned TW = $clog2(2 * L)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [Q-1:0]  vals   [L],
  output logic          busy,
  output logic [Q-1:0]  list_m [2*L],
  output logic [TW-1:0] list_t [2*L],
  input  logic [Q-1:0]  srt_m  [L],
  input  logic [TW-1:0] srt_t  [L],
  output logic          done,
  output logic [Q-1:0]  res_m  [L],
  output logic [TW-1:0] res_t  [L]
);
  localparam logic [Q-1:0] NEG_INF = '0;
  localparam logic [Q-1:0] POS_INF = '1;
  localparam int           CW      = (L > 2) ? $clog2(L) : 1;

  logic [Q-1:0]  val_q  [L];
  logic [L-1:0]  live_q;
  logic [CW-1:0] pass_q;

  // Slot index (0..L-1) that a list position holds, or -1 for an infinity.
  function automatic int slot_of(int pos);
    if (pos == 2 * L - 2) return L - 1;
    if (pos % 2 == 1 && pos < 2 * L - 1) return (pos - 1) / 2;
    return -1;
  endfunction

  // Constructed list for the current pass.
  always_comb begin
    for (int l = 0; l < L - 1; l++) begin
      list_m[2*l]   = NEG_INF;
      list_m[2*l+1] = live_q[l] ? val_q[l] : POS_INF;
    end
    list_m[2*L-2] = live_q[L-1] ? val_q[L-1] : POS_INF;
    list_m[2*L-1] = POS_INF;
    for (int p = 0; p < 2 * L; p++) list_t[p] = TW'(p);
  end

  // Slot retired by this pass and the slot left over after it.
  logic [CW-1:0] pick;
  logic [CW-1:0] last;
  logic [L-1:0]  live_after;

  always_comb begin
    bit found;
    int s;
    found = 1'b0;
    pick  = '0;
    for (int j = 0; j < L; j++) begin
      s = slot_of(int'(srt_t[j]));
      if (!found && s >= 0 && live_q[s]) begin
        found = 1'b1;
        pick  = CW'(s);
      end
    end
    if (!found) begin
      for (int l = L - 1; l >= 0; l--) if (live_q[l]) pick = CW'(l);
    end
    live_after = live_q & ~(L'(1) << pick);
    last = '0;
    for (int l = L - 1; l >= 0; l--) if (live_after[l]) last = CW'(l);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      live_q <= '0;
      pass_q <= '0;
      for (int l = 0; l < L; l++) begin
        val_q[l] <= '0;
        res_m[l] <= '0;
        res_t[l] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          live_q <= '1;
          pass_q <= '0;
          val_q  <= vals;
        end
      end else begin
        res_m[pass_q] <= srt_m[L-1];
        res_t[pass_q] <= TW'(pick);
        live_q        <= live_after;
        pass_q        <= pass_q + 1'b1;
        if (int'(pass_q) == L - 2) begin
          res_m[L-1] <= val_q[last];
          res_t[L-1] <= TW'(last);
          busy       <= 1'b0;
          done       <= 1'b1;
        end
      end
    end
  end

  // The retired slot must be live, and exactly one slot is left at the end.
  a_live_pick: assert property (@(posedge clk) disable iff (!rst_n)
                                busy |-> live_q[pick])
    else $error("general_sort_ctrl: retired a dead slot");
  a_one_left: assert property (@(posedge clk) disable iff (!rst_n)
                               (busy && int'(pass_q) == L - 2) |-> $onehot(live_after))
    else $error("general_sort_ctrl: not one slot left");
endmodule
