// add_backward_unit: local gradients of an add layer for one (x, w) pair.
//
// The add layer computes O = -sum|x - w|. Following the AdderNet training rule that
// ShiftAddNet adopts, its partial derivatives are taken as
//   dO/dw = x - w              (full-precision difference, not its sign)
//   dO/dx = HT(x - w)          (HardTanh: the difference clipped to [-1, +1])
// The HardTanh keeps the error propagated to the preceding shift layer bounded.
//
// Fixed point: x and w carry FRAC_W fractional bits, so +1.0 is 2**FRAC_W; both
// outputs are IN_W+1 bits in the same format and cannot overflow. The binary-point
// position is this implementation's choice. Purely combinational.
module add_backward_unit
  import shiftadd_pkg::*;
#(
  parameter int IN_W = DATA_W,
  parameter int FRAC = FRAC_W
) (
  input  logic signed [IN_W-1:0] x,
  input  logic signed [IN_W-1:0] w,
  output logic signed [IN_W:0]   d_w,   // dO/dw = x - w
  output logic signed [IN_W:0]   d_x    // dO/dx = HardTanh(x - w)
);

  localparam logic signed [IN_W:0] ONE = (IN_W+1)'(1) <<< FRAC;

  logic signed [IN_W:0] diff;
  logic signed [IN_W:0] unused_neg_abs;

  add_unit #(.IN_W(IN_W)) u_sub (.x(x), .w(w), .diff(diff), .neg_abs(unused_neg_abs));

  always_comb begin
    d_w = diff;
    if (diff > ONE)       d_x = ONE;
    else if (diff < -ONE) d_x = -ONE;
    else                  d_x = diff;
  end

endmodule
