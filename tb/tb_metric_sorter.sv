// tb_metric_sorter: end-to-end test of the metric sorter unit at reduced
// list sizes: L = 8 with its default network (simplified bubble), L = 8 and
// L = 4 forced to the pruned bitonic network, and L = 2. Each instance is
// driven and checked by an ms_agent (list updates, general sorts, stalls,
// back-to-back requests, saturation, ties with the infinity codes).
module tb_metric_sorter;
  import sorter_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] fin;
  int c [4], f [4];

  `define MS_INST(IDX, LL, ARCHP, NN)                                           \
    logic          iv``IDX, ir``IDX, ig``IDX, ov``IDX, og``IDX, os``IDX;       \
    logic [7:0]    imu``IDX [LL], ia``IDX [LL], om``IDX [LL];                 \
    logic [$clog2(2*LL)-1:0] ot``IDX [LL];                                    \
    metric_sorter #(.L(LL), .ARCH(ARCHP)) dut``IDX (                          \
      .clk, .rst_n, .in_valid(iv``IDX), .in_ready(ir``IDX),                   \
      .in_general(ig``IDX), .in_mu(imu``IDX), .in_a(ia``IDX),                 \
      .out_valid(ov``IDX), .out_general(og``IDX), .out_m(om``IDX),            \
      .out_t(ot``IDX), .out_sat(os``IDX));                                    \
    ms_agent #(.L(LL), .N(NN)) agt``IDX (                                     \
      .clk, .rst_n, .in_valid(iv``IDX), .in_ready(ir``IDX),                   \
      .in_general(ig``IDX), .in_mu(imu``IDX), .in_a(ia``IDX),                 \
      .out_valid(ov``IDX), .out_general(og``IDX), .out_m(om``IDX),            \
      .out_t(ot``IDX), .out_sat(os``IDX),                                     \
      .fin(fin[IDX]), .checks(c[IDX]), .failures(f[IDX]));

  `MS_INST(0, 8, default_arch(8), 400)
  `MS_INST(1, 8, PRUNED_BITONIC, 400)
  `MS_INST(2, 4, PRUNED_BITONIC, 400)
  `MS_INST(3, 2, default_arch(2), 200)

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (&fin);
    for (int h = 0; h < 4; h++) begin
      checks += c[h];
      failures += f[h];
    end
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
