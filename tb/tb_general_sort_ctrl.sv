// tb_general_sort_ctrl: sorts arbitrary lists with the general-sort
// controller closed around a real sorter, for L = 8 with the simplified
// bubble sorter and L = 4 with the pruned bitonic sorter.
//
// Each run loads L values (random, heavy ties, values equal to the -inf and
// +inf codes 0 and 255) and checks: the result is the ascending sort of the
// values; every result tag is a distinct input index holding that value;
// busy lasts exactly L-1 cycles; done comes L edges after the start edge and
// lasts one cycle.
module tb_general_sort_ctrl;
  import sorter_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [1:0] fin;
  int c [2], f [2];

  gsc_harness #(.L(8), .ARCH(SIMPLIFIED_BUBBLE), .N(300)) h8 (clk, rst_n, fin[0], c[0], f[0]);
  gsc_harness #(.L(4), .ARCH(PRUNED_BITONIC),    .N(300)) h4 (clk, rst_n, fin[1], c[1], f[1]);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (&fin);
    for (int h = 0; h < 2; h++) begin
      checks += c[h];
      failures += f[h];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
