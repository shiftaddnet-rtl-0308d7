// add_conv: add-layer convolution engine.
//
// Computes one add layer,
//   O_a[co][e][f] = - sum_{ci<C_I, r<R, s<S} | x[ci][e + r][f + s] - w[co][ci][r][s] |
// i.e. the negated L1 distance between each input window and each filter, with
// stride fixed to 1 (add layers of ShiftAddNet always use stride one) over the
// input map zero-padded by PAD. Padded positions enter as x = 0, so they add
// -|w| to the sum, exactly as the equation applied to the padded map does. Every
// term comes from an add_unit (subtract, absolute value), so the engine has no
// multiplier. One pair per clock, ACC_W-bit accumulation, output written OUT_W
// bits wide (default: the full accumulator, no requantisation).
//
// For training, the operand pair of every step is also exported (op_valid, op_x,
// op_w, op_w_addr): these are exactly the (x, w) pairs whose local gradients
// dO/dw = x - w and dO/dx = HT(x - w) the backward pass needs. op_w is the
// weight read port's data passed straight through, valid while op_valid is high.
//
// Interface and timing as shift_conv: reads in cycles 1..N after the start pulse
// (N = C_O*E*F*C_I*R*S), operand pairs in cycles 2..N+1, the last write and done
// in cycle N+2.
module add_conv
  import shiftadd_pkg::*;
#(
  parameter int C_I    = 16,
  parameter int H      = 32,
  parameter int W      = 32,
  parameter int C_O    = 16,
  parameter int R      = 3,
  parameter int S      = 3,
  parameter int PAD    = 1,
  parameter int DW     = DATA_W,
  parameter int AW_ACC = ACC_W,
  parameter int OUT_W  = ACC_W,
  localparam int E    = H + 2*PAD - R + 1,
  localparam int F    = W + 2*PAD - S + 1,
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
  input  logic signed [DW-1:0]    w_rdata,
  output logic                    o_we,
  output logic [O_AW-1:0]         o_waddr,
  output logic signed [OUT_W-1:0] o_wdata,
  output logic                    op_valid,
  output logic signed [DW-1:0]    op_x,
  output logic signed [DW-1:0]    op_w,
  output logic [W_AW-1:0]         op_w_addr
);

  logic            walk_busy, st_valid, st_pad, st_first, st_last, st_final;
  logic [O_AW-1:0] st_oaddr;

  conv_walker #(
    .C_I(C_I), .H(H), .W(W), .C_O(C_O), .R(R), .S(S), .U(1), .PAD(PAD)
  ) u_walk (
    .clk, .rst_n, .start(start && !busy), .busy(walk_busy),
    .step_valid(st_valid), .step_pad(st_pad), .step_first(st_first),
    .step_last(st_last), .step_final(st_final),
    .x_addr(x_raddr), .w_addr(w_raddr), .o_addr(st_oaddr)
  );

  // Stage 1: memory data arrives.
  logic            v1, pad1, first1, last1, final1;
  logic [O_AW-1:0] oaddr1;
  logic [W_AW-1:0] waddr1;

  logic signed [DW-1:0]     x_val;
  logic signed [DW:0]       diff, neg_abs;
  logic signed [AW_ACC-1:0] acc, acc_next;

  add_unit #(.IN_W(DW)) u_add (.x(x_val), .w(w_rdata), .diff(diff), .neg_abs(neg_abs));

  always_comb begin
    x_val    = pad1 ? '0 : x_rdata;
    acc_next = (first1 ? '0 : acc) + AW_ACC'(neg_abs);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, pad1, first1, last1, final1} <= '0;
      oaddr1  <= '0;
      waddr1  <= '0;
      acc     <= '0;
      o_we    <= 1'b0;
      o_waddr <= '0;
      o_wdata <= '0;
      done    <= 1'b0;
    end else begin
      v1     <= st_valid;
      pad1   <= st_pad;
      first1 <= st_first;
      last1  <= st_last;
      final1 <= st_final;
      oaddr1 <= st_oaddr;
      waddr1 <= w_raddr;
      if (v1) acc <= acc_next;
      o_we <= v1 && last1;
      done <= v1 && final1;
      if (v1 && last1) begin
        o_waddr <= oaddr1;
        o_wdata <= OUT_W'(acc_next);
      end
    end
  end

  assign op_valid  = v1;
  assign op_x      = x_val;
  assign op_w      = w_rdata;
  assign op_w_addr = waddr1;
  assign busy      = walk_busy || v1 || o_we;

endmodule
