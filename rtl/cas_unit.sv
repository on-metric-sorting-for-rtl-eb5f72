// cas_unit: compare-and-select (CAS) element of the sorting networks.
//
// One magnitude comparator and a 2-to-2 multiplexer. The element on the
// higher-index wire (b) moves to the lower output only if its metric is
// strictly smaller than the metric on the lower-index wire (a), as in the
// swap test of bubble sort; equal metrics keep their order. A tag of TW bits
// rides along with each metric so that the surviving candidates can be
// identified; the tag never takes part in the comparison (the tag is this
// design's addition).
//
// Purely combinational, no clock.
module cas_unit #(
  parameter int unsigned Q  = sorter_pkg::Q_DEF,
  parameter int unsigned TW = 6
) (
  input  logic [Q-1:0]  a_m,
  input  logic [TW-1:0] a_t,
  input  logic [Q-1:0]  b_m,
  input  logic [TW-1:0] b_t,
  output logic [Q-1:0]  lo_m,
  output logic [TW-1:0] lo_t,
  output logic [Q-1:0]  hi_m,
  output logic [TW-1:0] hi_t
);
  logic swap;

  always_comb begin
    swap = (b_m < a_m);
    lo_m = swap ? b_m : a_m;
    lo_t = swap ? b_t : a_t;
    hi_m = swap ? a_m : b_m;
    hi_t = swap ? a_t : b_t;
  end
endmodule
