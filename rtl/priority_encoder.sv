// priority_encoder: L-to-log2(L) priority encoder.
//
// Returns in idx the position of the lowest set bit of req and raises valid when any bit
// is set (idx is 0 when none is).  Lower positions win because they hold the test error
// patterns that come first in step-GRAND's search order.  Purely combinational.
//
// The step-GRAND evaluation unit ends in an L:log2(L) encoder; giving priority to the
// lowest index is this design's choice.
module priority_encoder #(
  parameter int unsigned L = stepgrand_pkg::L_DEF
) (
  input  logic [L-1:0]                 req,
  output logic [$clog2(L)-1:0]         idx,
  output logic                         valid
);

  always_comb begin
    idx = '0;
    for (int i = int'(L) - 1; i >= 0; i--)
      if (req[i]) idx = ($clog2(L))'(i);
  end

  assign valid = |req;

endmodule
