// shiftadd_layer: one ShiftAddNet layer, a shift layer followed by an add layer.
//
// Implements O = k_a(k_s(I, s*2^p), w_a): the input map I (C_I x H x W) is first
// convolved by the shift layer (C_S filters of R x S power-of-two weights, stride
// U, padding PAD) into an intermediate map (C_S x E_S x F_S, saturated to DW bits),
// which the add layer (C_A filters of RA x SA weights, stride 1, padding PAD_A)
// turns into the output map O[co][e][f] = -sum|x - w| (C_A x E_A x F_A, AW bits).
// Neither layer multiplies.
//
// Blocks: five buffer_ram buffers (input map, shift weights, intermediate map,
// add weights, output map), the shift_conv and add_conv engines, a controller
// (IDLE -> SHIFT -> ADD -> IDLE), an add_backward_unit that turns the add layer's
// operand stream into local gradients when train is set, and a shift_backward_unit
// for the shift layer's error and weight gradients.
//
// Host interface:
//   load_en/load_sel/load_addr/load_data  write one word of the input map, of the
//       shift weights (low bits = shift_w_t {sign, p}) or of the add weights; only
//       while idle.
//   start (pulse, while idle) runs the layer; busy is high until done pulses.
//       Latency: the first rising edge that sees done high is N_S + N_A + 7 edges
//       after the edge that samples start, where
//       N_S = C_S*E_S*F_S*C_I*R*S and N_A = C_A*E_A*F_A*C_S*RA*SA (one shift-and-add
//       or one subtract-and-accumulate per clock).
//   out_raddr/out_rdata  read the output map (data one cycle after the address).
//   train: while set during a run, every add-layer step emits grad_valid with the
//       weight index grad_w_addr, dO/dw = x - w (grad_d_w) and dO/dx = HT(x - w)
//       (grad_d_x), registered one cycle after the step.
//   bwd_*: one shift-layer gradient computation per bwd_valid (see
//       shift_backward_unit); bwd_fixed_shift selects the frozen-shift variant in
//       which the s and p gradients are skipped.
//   shift_sat_count counts intermediate values clipped to DW bits in the last run.
//
// Default sizes: a 16 -> 16 channel, 3 x 3, 32 x 32 layer of ResNet-20 on CIFAR-10
// (first stage), FIX8 data. DW selects the word width (8, 16 or 32 for the FIX8,
// FIX16 and FIX32 formats); AW must hold the largest layer sum, which for DW = 32
// means about 48 bits (DW + 2**(P_W-1) + log2(C_I*R*S)). Buffer organisation, control and the saturation between
// the layers are this implementation's own; the arithmetic of both layers and of
// the gradients follows the ShiftAddNet equations.
module shiftadd_layer
  import shiftadd_pkg::*;
#(
  parameter int C_I   = 16,
  parameter int H     = 32,
  parameter int W     = 32,
  parameter int C_S   = 16,
  parameter int R     = 3,
  parameter int S     = 3,
  parameter int U     = 1,
  parameter int PAD   = 1,
  parameter int C_A   = 16,
  parameter int RA    = 3,
  parameter int SA    = 3,
  parameter int PAD_A = 1,
  parameter int DW    = DATA_W,   // word width: 8, 16 or 32 for FIX8/16/32
  parameter int AW    = ACC_W,    // accumulator / output width
  localparam int E_S   = (H + 2*PAD - R) / U + 1,
  localparam int F_S   = (W + 2*PAD - S) / U + 1,
  localparam int E_A   = E_S + 2*PAD_A - RA + 1,
  localparam int F_A   = F_S + 2*PAD_A - SA + 1,
  localparam int IN_D  = C_I*H*W,
  localparam int SW_D  = C_S*C_I*R*S,
  localparam int MID_D = C_S*E_S*F_S,
  localparam int AW_D  = C_A*C_S*RA*SA,
  localparam int OUT_D = C_A*E_A*F_A,
  localparam int IN_AW  = (IN_D  > 1) ? $clog2(IN_D)  : 1,
  localparam int SW_AW  = (SW_D  > 1) ? $clog2(SW_D)  : 1,
  localparam int MID_AW = (MID_D > 1) ? $clog2(MID_D) : 1,
  localparam int AWT_AW = (AW_D  > 1) ? $clog2(AW_D)  : 1,
  localparam int OUT_AW = (OUT_D > 1) ? $clog2(OUT_D) : 1,
  localparam int LD_AW  = (IN_AW > SW_AW) ? ((IN_AW > AWT_AW) ? IN_AW : AWT_AW)
                                          : ((SW_AW > AWT_AW) ? SW_AW : AWT_AW)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // weight and input loading
  input  logic                     load_en,
  input  load_sel_e                load_sel,
  input  logic [LD_AW-1:0]         load_addr,
  input  logic [DW-1:0]            load_data,
  // run control
  input  logic                     start,
  input  logic                     train,
  output logic                     busy,
  output logic                     done,
  output logic [31:0]              shift_sat_count,
  // output map read port
  input  logic [OUT_AW-1:0]        out_raddr,
  output logic signed [AW-1:0]     out_rdata,
  // add-layer local gradients (train)
  output logic                     grad_valid,
  output logic [AWT_AW-1:0]        grad_w_addr,
  output logic signed [DW:0]       grad_d_w,
  output logic signed [DW:0]       grad_d_x,
  // shift-layer gradients
  input  logic                     bwd_valid,
  input  logic                     bwd_fixed_shift,
  input  logic signed [DW:0]       bwd_g,
  input  logic signed [DW-1:0]     bwd_x,
  input  shift_w_t                 bwd_w,
  output logic                     bwd_x_valid,
  output logic                     bwd_w_valid,
  output logic signed [AW-1:0]     bwd_d_x,
  output logic signed [AW-1:0]     bwd_d_s,
  output logic signed [AW-1:0]     bwd_d_p
);

  // ---------------------------------------------------------------- controller
  typedef enum logic [1:0] {ST_IDLE, ST_SHIFT, ST_ADD} state_e;
  state_e state;

  logic shift_start, shift_busy, shift_done;
  logic add_start, add_busy, add_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= ST_IDLE;
      shift_start <= 1'b0;
      add_start   <= 1'b0;
      done        <= 1'b0;
    end else begin
      shift_start <= 1'b0;
      add_start   <= 1'b0;
      done        <= 1'b0;
      unique case (state)
        ST_IDLE:  if (start) begin
                    state       <= ST_SHIFT;
                    shift_start <= 1'b1;
                  end
        ST_SHIFT: if (shift_done) begin
                    state     <= ST_ADD;
                    add_start <= 1'b1;
                  end
        ST_ADD:   if (add_done) begin
                    state <= ST_IDLE;
                    done  <= 1'b1;
                  end
        default:  state <= ST_IDLE;
      endcase
    end
  end

  assign busy = (state != ST_IDLE);

  // ---------------------------------------------------------------- buffers
  logic                    ld_in, ld_sw, ld_aw;
  logic [IN_AW-1:0]        in_raddr;
  logic signed [DW-1:0] in_rdata;
  logic [SW_AW-1:0]        sw_raddr;
  shift_w_t                sw_rdata;
  logic [MID_AW-1:0]       mid_raddr, mid_waddr;
  logic signed [DW-1:0] mid_rdata, mid_wdata;
  logic                    mid_we, mid_sat;
  logic [AWT_AW-1:0]       aw_raddr;
  logic signed [DW-1:0] aw_rdata;
  logic                    out_we;
  logic [OUT_AW-1:0]       out_waddr;
  logic signed [AW-1:0]    out_wdata;

  always_comb begin
    ld_in = load_en && (state == ST_IDLE) && (load_sel == LOAD_INPUT);
    ld_sw = load_en && (state == ST_IDLE) && (load_sel == LOAD_SHIFT_W);
    ld_aw = load_en && (state == ST_IDLE) && (load_sel == LOAD_ADD_W);
  end

  buffer_ram #(.DEPTH(IN_D), .WIDTH(DW)) u_in_buf (
    .clk, .we(ld_in), .waddr(IN_AW'(load_addr)), .wdata(load_data),
    .raddr(in_raddr), .rdata(in_rdata)
  );

  buffer_ram #(.DEPTH(SW_D), .WIDTH(SHIFT_W_BITS)) u_sw_buf (
    .clk, .we(ld_sw), .waddr(SW_AW'(load_addr)), .wdata(load_data[SHIFT_W_BITS-1:0]),
    .raddr(sw_raddr), .rdata(sw_rdata)
  );

  buffer_ram #(.DEPTH(MID_D), .WIDTH(DW)) u_mid_buf (
    .clk, .we(mid_we), .waddr(mid_waddr), .wdata(mid_wdata),
    .raddr(mid_raddr), .rdata(mid_rdata)
  );

  buffer_ram #(.DEPTH(AW_D), .WIDTH(DW)) u_aw_buf (
    .clk, .we(ld_aw), .waddr(AWT_AW'(load_addr)), .wdata(load_data),
    .raddr(aw_raddr), .rdata(aw_rdata)
  );

  buffer_ram #(.DEPTH(OUT_D), .WIDTH(AW)) u_out_buf (
    .clk, .we(out_we), .waddr(out_waddr), .wdata(out_wdata),
    .raddr(out_raddr), .rdata(out_rdata)
  );

  // ---------------------------------------------------------------- shift layer
  shift_conv #(
    .C_I(C_I), .H(H), .W(W), .C_O(C_S), .R(R), .S(S), .U(U), .PAD(PAD),
    .DW(DW), .AW_ACC(AW), .OUT_W(DW)
  ) u_shift (
    .clk, .rst_n, .start(shift_start), .busy(shift_busy), .done(shift_done),
    .x_raddr(in_raddr), .x_rdata(in_rdata),
    .w_raddr(sw_raddr), .w_rdata(sw_rdata),
    .o_we(mid_we), .o_waddr(mid_waddr), .o_wdata(mid_wdata), .o_sat(mid_sat)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           shift_sat_count <= '0;
    else if (shift_start) shift_sat_count <= '0;
    else if (mid_sat)     shift_sat_count <= shift_sat_count + 1'b1;
  end

  // ---------------------------------------------------------------- add layer
  logic                     op_valid;
  logic signed [DW-1:0] op_x, op_w;
  logic [AWT_AW-1:0]        op_w_addr;

  add_conv #(
    .C_I(C_S), .H(E_S), .W(F_S), .C_O(C_A), .R(RA), .S(SA), .PAD(PAD_A),
    .DW(DW), .AW_ACC(AW), .OUT_W(AW)
  ) u_add (
    .clk, .rst_n, .start(add_start), .busy(add_busy), .done(add_done),
    .x_raddr(mid_raddr), .x_rdata(mid_rdata),
    .w_raddr(aw_raddr), .w_rdata(aw_rdata),
    .o_we(out_we), .o_waddr(out_waddr), .o_wdata(out_wdata),
    .op_valid(op_valid), .op_x(op_x), .op_w(op_w), .op_w_addr(op_w_addr)
  );

  // ---------------------------------------------------------------- add-layer gradients
  logic signed [DW:0] g_dw_c, g_dx_c;

  add_backward_unit #(.IN_W(DW), .FRAC(FRAC_W)) u_add_bwd (
    .x(op_x), .w(op_w), .d_w(g_dw_c), .d_x(g_dx_c)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grad_valid  <= 1'b0;
      grad_w_addr <= '0;
      grad_d_w    <= '0;
      grad_d_x    <= '0;
    end else begin
      grad_valid <= op_valid && train;
      if (op_valid && train) begin
        grad_w_addr <= op_w_addr;
        grad_d_w    <= g_dw_c;
        grad_d_x    <= g_dx_c;
      end
    end
  end

  // ---------------------------------------------------------------- shift-layer gradients
  shift_backward_unit #(
    .G_W(DW+1), .X_W(DW), .OUT_W(AW), .FRAC(FRAC_W)
  ) u_shift_bwd (
    .clk, .rst_n, .in_valid(bwd_valid), .fixed_shift(bwd_fixed_shift),
    .g(bwd_g), .x(bwd_x), .w(bwd_w),
    .x_valid(bwd_x_valid), .w_valid(bwd_w_valid),
    .d_x(bwd_d_x), .d_s(bwd_d_s), .d_p(bwd_d_p)
  );

  // ---------------------------------------------------------------- checks
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state == ST_IDLE) else $error("shiftadd_layer: start while busy");
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n)
    load_en |-> state == ST_IDLE) else $error("shiftadd_layer: load while busy");
  a_engines_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    !(shift_busy && add_busy)) else $error("shiftadd_layer: both engines busy");

endmodule
