// shift_conv: shift-layer convolution engine.
//
// Computes one shift layer,
//   O_s[co][e][f] = sum_{ci<C_I, r<R, s<S} x[ci][e*U + r][f*U + s] * s[co][ci][r][s] * 2^p[co][ci][r][s]
// over the input map zero-padded by PAD on every side, with stride U (the shift
// layer keeps the stride of the convolution it replaces). Every product is formed
// by a shift_unit (sign flip and barrel shift), so the engine has no multiplier.
// One weight/activation pair is processed per clock; results are accumulated in
// ACC_W bits and written out saturated to OUT_W bits (by default back to the
// DATA_W activation format, ready for the add layer that follows; the
// requantisation by saturation is this implementation's choice).
//
// Interface: input map and weights are read from synchronous-read memories through
// x_raddr/x_rdata and w_raddr/w_rdata (data the cycle after the address); results
// leave through a write port o_we/o_waddr/o_wdata. o_sat flags a write whose value
// was clipped. Layouts are those of conv_walker.
//
// Timing: with N = C_O*E*F*C_I*R*S, a start pulse in cycle 0 gives reads in cycles
// 1..N, the last result write and the done pulse in cycle N+2. busy is high from
// cycle 1 to cycle N+2.
module shift_conv
  import shiftadd_pkg::*;
#(
  parameter int C_I    = 16,
  parameter int H      = 32,
  parameter int W      = 32,
  parameter int C_O    = 16,
  parameter int R      = 3,
  parameter int S      = 3,
  parameter int U      = 1,
  parameter int PAD    = 1,
  parameter int DW     = DATA_W,
  parameter int AW_ACC = ACC_W,
  parameter int OUT_W  = DATA_W,
  localparam int E    = (H + 2*PAD - R) / U + 1,
  localparam int F    = (W + 2*PAD - S) / U + 1,
  localparam int X_AW = (C_I*H*W > 1)     ? $clog2(C_I*H*W)     : 1,
  localparam int W_AW = (C_O*C_I*R*S > 1) ? $clog2(C_O*C_I*R*S) : 1,
  localparam int O_AW = (C_O*E*F > 1)     ? $clog2(C_O*E*F)     : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  output logic [X_AW-1:0]         x_raddr,
  input  logic signed [DW-1:0]    x_rdata,
  output logic [W_AW-1:0]         w_raddr,
  input  shift_w_t                w_rdata,
  output logic                    o_we,
  output logic [O_AW-1:0]         o_waddr,
  output logic signed [OUT_W-1:0] o_wdata,
  output logic                    o_sat
);

  localparam logic signed [AW_ACC-1:0] OUT_MAX = AW_ACC'((64'sd1 <<< (OUT_W-1)) - 1);
  localparam logic signed [AW_ACC-1:0] OUT_MIN = -OUT_MAX - 1;

  logic            walk_busy, st_valid, st_pad, st_first, st_last, st_final;
  logic [O_AW-1:0] st_oaddr;

  conv_walker #(
    .C_I(C_I), .H(H), .W(W), .C_O(C_O), .R(R), .S(S), .U(U), .PAD(PAD)
  ) u_walk (
    .clk, .rst_n, .start(start && !busy), .busy(walk_busy),
    .step_valid(st_valid), .step_pad(st_pad), .step_first(st_first),
    .step_last(st_last), .step_final(st_final),
    .x_addr(x_raddr), .w_addr(w_raddr), .o_addr(st_oaddr)
  );

  // Stage 1: memory data arrives.
  logic            v1, pad1, first1, last1, final1;
  logic [O_AW-1:0] oaddr1;

  logic signed [DW-1:0]     x_val;
  logic signed [AW_ACC-1:0] term, acc, acc_next;

  shift_unit #(.IN_W(DW), .OUT_W(AW_ACC)) u_shift (.x(x_val), .w(w_rdata), .y(term));

  always_comb begin
    x_val    = pad1 ? '0 : x_rdata;
    acc_next = (first1 ? '0 : acc) + term;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, pad1, first1, last1, final1} <= '0;
      oaddr1  <= '0;
      acc     <= '0;
      o_we    <= 1'b0;
      o_waddr <= '0;
      o_wdata <= '0;
      o_sat   <= 1'b0;
      done    <= 1'b0;
    end else begin
      v1     <= st_valid;
      pad1   <= st_pad;
      first1 <= st_first;
      last1  <= st_last;
      final1 <= st_final;
      oaddr1 <= st_oaddr;
      if (v1) acc <= acc_next;
      o_we    <= v1 && last1;
      done    <= v1 && final1;
      if (v1 && last1) begin
        o_waddr <= oaddr1;
        if (acc_next > OUT_MAX) begin
          o_wdata <= OUT_W'(OUT_MAX);
          o_sat   <= 1'b1;
        end else if (acc_next < OUT_MIN) begin
          o_wdata <= OUT_W'(OUT_MIN);
          o_sat   <= 1'b1;
        end else begin
          o_wdata <= OUT_W'(acc_next);
          o_sat   <= 1'b0;
        end
      end else begin
        o_sat <= 1'b0;
      end
    end
  end

  assign busy = walk_busy || v1 || o_we;

endmodule
