// add_unit: element operation of an add layer.
//
// For one input activation x and one add-layer weight w it returns the difference
// d = x - w and the add layer's contribution -|x - w| (the add layer's output is the
// negated L1 distance -sum|x - w| over a window). The difference is also what the
// add layer's weight gradient needs, so it is exported for the backward pass.
//
// Both outputs are IN_W+1 bits, enough for every pair of IN_W-bit signed inputs:
// no overflow is possible. Purely combinational, no clock.
module add_unit
  import shiftadd_pkg::*;
#(
  parameter int IN_W = DATA_W
) (
  input  logic signed [IN_W-1:0] x,
  input  logic signed [IN_W-1:0] w,
  output logic signed [IN_W:0]   diff,      // x - w
  output logic signed [IN_W:0]   neg_abs    // -|x - w|
);

  always_comb begin
    diff    = (IN_W+1)'(x) - (IN_W+1)'(w);
    neg_abs = diff[IN_W] ? diff : -diff;
  end

endmodule
