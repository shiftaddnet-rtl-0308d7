// shift_backward_unit: local gradients of a shift layer for one weight.
//
// A shift layer computes O_s = sum x * w_s with w_s = s * 2^p. Given the error g
// arriving from the following add layer (dO_a/dO_s) and the activation x that met
// the weight in the forward pass, the gradients are
//   d_x = g * w_s            error passed to the layer below (a shift of g)
//   d_s = g * x              gradient of the sign term
//   d_p = g * x * w_s * ln2  gradient of the power term
// d_x needs only a shift_unit. The product g * x is a true multiplication (the
// description gives the formula, not a multiplier-free way of forming it); the
// factor w_s is applied by a second shift_unit and the constant ln2 by a fixed
// shift-and-add network over the set bits of round(ln2 * 2^16) = 0xB172.
//
// fixed_shift selects the variant with frozen shift layers: the error is still
// propagated (d_x valid) but the s and p gradients are skipped, w_valid stays low
// and d_s, d_p are held at zero.
//
// Formats: g and x carry FRAC fractional bits; all outputs are OUT_W bits with FRAC
// fractional bits (products are truncated back by >>> FRAC, ln2 by >>> 16).
// One register stage: inputs sampled with in_valid appear one cycle later.
module shift_backward_unit
  import shiftadd_pkg::*;
#(
  parameter int G_W   = DATA_W + 1,
  parameter int X_W   = DATA_W,
  parameter int OUT_W = ACC_W,
  parameter int FRAC  = FRAC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    fixed_shift,
  input  logic signed [G_W-1:0]   g,
  input  logic signed [X_W-1:0]   x,
  input  shift_w_t                w,
  output logic                    x_valid,   // d_x valid
  output logic                    w_valid,   // d_s, d_p valid (learnable shift layers only)
  output logic signed [OUT_W-1:0] d_x,
  output logic signed [OUT_W-1:0] d_s,
  output logic signed [OUT_W-1:0] d_p
);

  localparam logic [15:0] LN2_Q16 = 16'hB172;   // round(ln(2) * 65536) = 45426
  localparam int          PROD_W  = G_W + X_W;
  localparam int          WIDE_W  = OUT_W + 16;

  logic signed [OUT_W-1:0]  dx_c;
  logic signed [PROD_W-1:0] gx;
  logic signed [OUT_W-1:0]  gx_scaled;   // g * x with FRAC fractional bits
  logic signed [OUT_W-1:0]  gxw;         // g * x * w_s
  logic signed [WIDE_W-1:0] ln2_acc;
  logic signed [OUT_W-1:0]  dp_c;

  shift_unit #(.IN_W(G_W),   .OUT_W(OUT_W)) u_dx  (.x(g),         .w(w), .y(dx_c));
  shift_unit #(.IN_W(OUT_W), .OUT_W(OUT_W)) u_gxw (.x(gx_scaled), .w(w), .y(gxw));

  always_comb begin
    gx        = PROD_W'(g) * PROD_W'(x);
    gx_scaled = OUT_W'(gx >>> FRAC);
    // Constant multiplication by ln2 as a sum of shifted copies.
    ln2_acc = '0;
    for (int i = 0; i < 16; i++) begin
      if (LN2_Q16[i]) ln2_acc = ln2_acc + (WIDE_W'(gxw) <<< i);
    end
    dp_c = OUT_W'(ln2_acc >>> 16);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_valid <= 1'b0;
      w_valid <= 1'b0;
      d_x     <= '0;
      d_s     <= '0;
      d_p     <= '0;
    end else begin
      x_valid <= in_valid;
      w_valid <= in_valid && !fixed_shift;
      if (in_valid) begin
        d_x <= dx_c;
        d_s <= fixed_shift ? '0 : gx_scaled;
        d_p <= fixed_shift ? '0 : dp_c;
      end
    end
  end

endmodule
