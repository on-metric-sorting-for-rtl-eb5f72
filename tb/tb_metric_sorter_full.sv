// tb_metric_sorter_full: the metric sorter unit at its reference size
// (L = 32, Q = 8, pruned bitonic network, all parameters at their defaults),
// driven through list updates and general sorts by an ms_agent that checks
// every result and counts every mechanism.
module tb_metric_sorter_full;
  import sorter_pkg::*;
  localparam int L = L_DEF, Q = Q_DEF, TW = $clog2(2 * L);

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          in_valid, in_ready, in_general, out_valid, out_general, out_sat, fin;
  logic [Q-1:0]  in_mu [L], in_a [L], out_m [L];
  logic [TW-1:0] out_t [L];
  int            c, f;

  metric_sorter dut (.*);

  ms_agent #(.L(L), .N(400)) agt (.*, .checks(c), .failures(f));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (fin);
    checks = c;
    failures = f;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
