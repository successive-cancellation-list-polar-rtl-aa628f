// cas_unit: compare-and-swap element ("C&S") of the sorting network.
//
// The smaller of the two W-bit unsigned words leaves on `lo` (the upper
// output in the sorter drawing) and the larger on `hi`. Equal words pass
// unswapped. The caller packs its sort key so that unsigned order is the
// wanted order. Purely combinational.
module cas_unit #(
  parameter int unsigned W = 12
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] lo,
  output logic [W-1:0] hi
);
  logic swap;
  assign swap = a > b;
  assign lo   = swap ? b : a;
  assign hi   = swap ? a : b;
endmodule
