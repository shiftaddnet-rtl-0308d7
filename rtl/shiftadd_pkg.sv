// shiftadd_pkg: shared types and default sizes of the ShiftAddNet layer datapath.
//
// A ShiftAddNet layer replaces every multiplication of a convolution by two cheap
// operations: a shift layer, whose weights are w_s = s * 2^p with a sign s in
// {-1, 0, +1} and an integer power p, followed by an add layer, which computes the
// negated L1 distance -sum|x - w| between input patches and weights.
//
// Numbers are two's-complement fixed point. The default word is 8 bits (the FIX8
// format the ShiftAddNet results are quoted in; FIX16 and FIX32 are obtained by
// changing DATA_W). The position of the binary point (FRAC_W), the width of the
// shift exponent (P_W), the sign encoding and the accumulator width are choices of
// this implementation; the published description fixes none of them.
package shiftadd_pkg;

  // Activation / add-weight word width (FIX8 by default).
  parameter int DATA_W = 8;
  // Fractional bits of the fixed-point format; 1.0 = 2**FRAC_W (used by HardTanh).
  parameter int FRAC_W = 4;
  // Width of the signed shift exponent p: p in [-2**(P_W-1), 2**(P_W-1)-1].
  parameter int P_W = 4;
  // Accumulator width of the convolution engines.
  parameter int ACC_W = 32;

  // Sign-flip operator s of a shift weight.
  typedef enum logic [1:0] {
    SIGN_ZERO = 2'b00,   // s = 0: pruned weight, contributes nothing
    SIGN_POS  = 2'b01,   // s = +1
    SIGN_NEG  = 2'b11    // s = -1 (2'b10 is unused and read as zero)
  } sign_e;

  // One shift weight w_s = s * 2^p.
  typedef struct packed {
    sign_e                 sgn;
    logic signed [P_W-1:0] p;
  } shift_w_t;

  localparam int SHIFT_W_BITS = $bits(shift_w_t);

  // Which buffer the host load port writes.
  typedef enum logic [1:0] {
    LOAD_INPUT   = 2'd0,  // input feature map of the shift layer
    LOAD_SHIFT_W = 2'd1,  // shift weights {s, p}
    LOAD_ADD_W   = 2'd2   // add-layer weights
  } load_sel_e;

endpackage
