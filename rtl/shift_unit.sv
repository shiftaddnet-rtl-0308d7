// shift_unit: multiplication-free product of a value and a shift weight.
//
// Computes y = x * s * 2^p, where the shift weight w = {s, p} holds a sign-flip
// operator s in {-1, 0, +1} and a signed power-of-two exponent p. The product is a
// barrel shift of the sign-extended input (left for p >= 0, arithmetic right for
// p < 0) followed by an optional negation, so no multiplier is used. This is the
// operation of the shift layers (w_s = s * 2^p); the example kernel of the overview
// figure uses shifts >>2 .. <<2 and zero weights, all of which the default 4-bit
// exponent covers.
//
// Own choices: a right shift truncates towards minus infinity (plain arithmetic
// shift, no rounding); the result is OUT_W bits and wraps if x << p does not fit,
// which cannot happen when OUT_W >= IN_W + 2**(P_W-1) - 1 (the default 8 -> 32 bits).
//
// Purely combinational, no clock.
module shift_unit
  import shiftadd_pkg::*;
#(
  parameter int IN_W  = DATA_W,
  parameter int OUT_W = ACC_W
) (
  input  logic signed [IN_W-1:0]  x,
  input  shift_w_t                w,
  output logic signed [OUT_W-1:0] y
);

  logic signed [OUT_W-1:0] x_ext;
  logic signed [OUT_W-1:0] mag;
  logic signed [P_W:0]     p_ext;
  logic        [P_W:0]     rsh;

  always_comb begin
    x_ext = OUT_W'(x);                 // sign extension (x is signed)
    p_ext = {w.p[P_W-1], w.p};         // one extra bit so that -p never overflows
    rsh   = unsigned'(-p_ext);
    if (!w.p[P_W-1]) mag = x_ext <<< w.p;
    else             mag = x_ext >>> rsh;
    unique case (w.sgn)
      SIGN_POS: y = mag;
      SIGN_NEG: y = -mag;
      default:  y = '0;
    endcase
  end

endmodule
