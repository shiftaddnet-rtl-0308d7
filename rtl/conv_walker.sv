// conv_walker: loop sequencer shared by the shift and add convolution engines.
//
// After a start pulse it walks, one step per clock, through
//   for co < C_O, e < E, f < F          (output pixel, f fastest)
//     for ci < C_I, r < R, s < S        (kernel window, s fastest)
// and for every step presents the flat addresses of the input value
// x[ci][e*U + r - PAD][f*U + s - PAD], of the weight w[co][ci][r][s] and of the
// output O[co][e][f], plus flags for the first and last step of each output pixel.
// Window positions outside the H x W map are flagged as padding (their input
// address is 0 and the engine substitutes the value zero). E and F follow from the
// usual formula E = (H + 2*PAD - R)/U + 1.
//
// Memory layouts (row-major): x[(ci*H + y)*W + x], w[((co*C_I + ci)*R + r)*S + s],
// O[(co*E + e)*F + f].
//
// Timing: start is sampled in cycle 0; steps are issued in cycles 1 .. C_O*E*F*C_I*R*S
// with step_valid high; final marks the very last step. start is ignored while busy.
module conv_walker #(
  parameter int C_I = 16,
  parameter int H   = 32,
  parameter int W   = 32,
  parameter int C_O = 16,
  parameter int R   = 3,
  parameter int S   = 3,
  parameter int U   = 1,
  parameter int PAD = 1,
  localparam int E    = (H + 2*PAD - R) / U + 1,
  localparam int F    = (W + 2*PAD - S) / U + 1,
  localparam int X_AW = (C_I*H*W > 1)     ? $clog2(C_I*H*W)     : 1,
  localparam int W_AW = (C_O*C_I*R*S > 1) ? $clog2(C_O*C_I*R*S) : 1,
  localparam int O_AW = (C_O*E*F > 1)     ? $clog2(C_O*E*F)     : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            busy,
  output logic            step_valid,
  output logic            step_pad,     // window position lies in the zero padding
  output logic            step_first,   // first step of an output pixel
  output logic            step_last,    // last step of an output pixel
  output logic            step_final,   // last step of the whole layer
  output logic [X_AW-1:0] x_addr,
  output logic [W_AW-1:0] w_addr,
  output logic [O_AW-1:0] o_addr
);

  logic [$clog2(C_O+1)-1:0] co;
  logic [$clog2(E+1)-1:0]   e;
  logic [$clog2(F+1)-1:0]   f;
  logic [$clog2(C_I+1)-1:0] ci;
  logic [$clog2(R+1)-1:0]   r;
  logic [$clog2(S+1)-1:0]   s;

  logic last_s, last_r, last_ci, last_f, last_e, last_co;
  int   y, xx;

  always_comb begin
    last_s  = (int'(s)  == S-1);
    last_r  = (int'(r)  == R-1);
    last_ci = (int'(ci) == C_I-1);
    last_f  = (int'(f)  == F-1);
    last_e  = (int'(e)  == E-1);
    last_co = (int'(co) == C_O-1);

    y  = int'(e) * U + int'(r) - PAD;
    xx = int'(f) * U + int'(s) - PAD;

    step_valid = busy;
    step_pad   = (y < 0) || (y >= H) || (xx < 0) || (xx >= W);
    step_first = (ci == '0) && (r == '0) && (s == '0);
    step_last  = last_ci && last_r && last_s;
    step_final = step_last && last_f && last_e && last_co;
    x_addr     = step_pad ? '0 : X_AW'((int'(ci) * H + y) * W + xx);
    w_addr     = W_AW'(((int'(co) * C_I + int'(ci)) * R + int'(r)) * S + int'(s));
    o_addr     = O_AW'((int'(co) * E + int'(e)) * F + int'(f));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      {co, e, f, ci, r, s} <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1;
        {co, e, f, ci, r, s} <= '0;
      end
    end else begin
      if (step_final) busy <= 1'b0;
      if (!last_s) s <= s + 1'b1;
      else begin
        s <= '0;
        if (!last_r) r <= r + 1'b1;
        else begin
          r <= '0;
          if (!last_ci) ci <= ci + 1'b1;
          else begin
            ci <= '0;
            if (!last_f) f <= f + 1'b1;
            else begin
              f <= '0;
              if (!last_e) e <= e + 1'b1;
              else begin
                e <= '0;
                if (!last_co) co <= co + 1'b1;
                else co <= '0;
              end
            end
          end
        end
      end
    end
  end

endmodule
