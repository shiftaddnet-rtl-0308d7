// shiftadd_layer_check: end-to-end checker for one ShiftAddNet layer (shift layer,
// then add layer), instantiated by the tb_shiftadd_* testbenches with the layer
// shape and number format to test.
//
// It loads the input map and both weight tensors through the host port, runs the
// layer N_RUNS times and compares the whole output map with a model of
// O = -sum|sat(sum x * s * 2^p) - w_a| computed with integer arithmetic. It also
// checks the start-to-done cycle count (N_S + N_A + 7), the saturation counter,
// the add-layer gradient stream in training mode (x - w and HardTanh(x - w), in the
// engine's loop order) and the shift-layer gradient unit in learnable and frozen
// shift mode. Each mechanism is counted and must occur at least once: zero padding
// (when the shape has padding), pruned (s = 0) shift weights, left and right
// shifts, saturation of the intermediate map, training-mode gradient output,
// HardTanh clipping, frozen-shift gradient skipping and learnable-shift gradients.
// Run r uses exponents -3..2 without training (r mod 3 = 0), -8..7 with training
// (r mod 3 = 1) or 2..7 with training, which forces saturation (r mod 3 = 2).
module shiftadd_layer_check
  import shiftadd_pkg::*;
#(
  parameter int C_I = 2, parameter int H = 6, parameter int W = 5, parameter int C_S = 3,
  parameter int R = 3, parameter int S = 3, parameter int U = 2, parameter int PAD = 1,
  parameter int C_A = 2, parameter int RA = 3, parameter int SA = 3, parameter int PAD_A = 1,
  parameter int DW = 8, parameter int AW = 32,
  parameter int N_RUNS = 3, parameter int MAX_CYCLES = 200000,
  // 1: print TB_RESULT and end the simulation; 0: only set `finished`, for a
  // testbench that runs several checkers and reports their sum
  parameter bit REPORT = 1
);

  localparam int E_S = (H + 2*PAD - R) / U + 1, F_S = (W + 2*PAD - S) / U + 1;
  localparam int E_A = E_S + 2*PAD_A - RA + 1, F_A = F_S + 2*PAD_A - SA + 1;
  localparam int IN_D = C_I*H*W, SW_D = C_S*C_I*R*S, MID_D = C_S*E_S*F_S;
  localparam int AW_D = C_A*C_S*RA*SA, OUT_D = C_A*E_A*F_A;
  localparam int N_S = MID_D*C_I*R*S, N_A = OUT_D*C_S*RA*SA;
  localparam int IN_AW = (IN_D > 1) ? $clog2(IN_D) : 1, SW_AW = (SW_D > 1) ? $clog2(SW_D) : 1;
  localparam int AWT_AW = (AW_D > 1) ? $clog2(AW_D) : 1, OUT_AW = (OUT_D > 1) ? $clog2(OUT_D) : 1;
  localparam longint SMAX = (longint'(1) <<< (DW-1)) - 1, SMIN = -SMAX - 1;
  localparam int LD_AW = (IN_AW > SW_AW) ? ((IN_AW > AWT_AW) ? IN_AW : AWT_AW)
                                         : ((SW_AW > AWT_AW) ? SW_AW : AWT_AW);

  logic clk = 1'b0, rst_n = 1'b0;
  logic load_en = 1'b0;
  load_sel_e load_sel = LOAD_INPUT;
  logic [LD_AW-1:0] load_addr = '0;
  logic [DW-1:0] load_data = '0;
  logic start = 1'b0, train = 1'b0, busy, done;
  logic [31:0] shift_sat_count;
  logic [OUT_AW-1:0] out_raddr = '0;
  logic signed [AW-1:0] out_rdata;
  logic grad_valid;
  logic [AWT_AW-1:0] grad_w_addr;
  logic signed [DW:0] grad_d_w, grad_d_x;
  logic bwd_valid = 1'b0, bwd_fixed_shift = 1'b0;
  logic signed [DW:0] bwd_g = '0;
  logic signed [DW-1:0] bwd_x = '0;
  shift_w_t bwd_w = '0;
  logic bwd_x_valid, bwd_w_valid;
  logic signed [AW-1:0] bwd_d_x, bwd_d_s, bwd_d_p;

  shiftadd_layer #(
    .C_I(C_I), .H(H), .W(W), .C_S(C_S), .R(R), .S(S), .U(U), .PAD(PAD),
    .C_A(C_A), .RA(RA), .SA(SA), .PAD_A(PAD_A), .DW(DW), .AW(AW)
  ) dut (.*);

  always #5 clk = ~clk;

  // test data and model
  int in_m  [IN_D];
  int sw_sc [SW_D];
  int sw_p  [SW_D];
  int aw_m  [AW_D];
  int mid_m [MID_D];
  longint out_m [OUT_D];
  int exp_sat;
  int gq_w [$];
  longint gq_dw [$], gq_dx [$];

  // Loop bounds of the model, set at run time so that the simulator compiles the
  // model as loops instead of unrolling them.
  int rt_c_i, rt_r, rt_s, rt_c_s, rt_ra, rt_sa, rt_e_s, rt_f_s, rt_c_a, rt_e_a, rt_f_a;

  int checks = 0, failures = 0;
  bit finished = 1'b0;
  int n_pad = 0, n_pruned = 0, n_lsh = 0, n_rsh = 0, n_sat = 0, n_grad = 0, n_clip = 0;
  int n_fixed_skip = 0, n_learn_grad = 0;

  initial begin
    repeat (MAX_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finished = 1'b1;
    if (REPORT) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic longint fdiv(longint a, longint d);
    return (a >= 0) ? a / d : -((-a + d - 1) / d);
  endfunction

  function automatic longint shift_ref(longint v, int sc, int p);
    longint m = (p >= 0) ? v * (longint'(1) << p) : fdiv(v, longint'(1) << (-p));
    return (sc == 1) ? m : (sc == 3) ? -m : 0;
  endfunction

  // random DW-bit signed word
  function automatic int rand_word();
    int v = $urandom;
    return v >>> (32 - DW);
  endfunction

  task automatic make_data(int pmin, int pmax);
    for (int i = 0; i < IN_D; i++) in_m[i] = rand_word();
    for (int i = 0; i < SW_D; i++) begin
      sw_sc[i] = $urandom_range(3);
      sw_p[i]  = $urandom_range(pmax - pmin) + pmin;
      if (sw_sc[i] == 0 || sw_sc[i] == 2) n_pruned++;
      else if (sw_p[i] > 0) n_lsh++;
      else if (sw_p[i] < 0) n_rsh++;
    end
    for (int i = 0; i < AW_D; i++) aw_m[i] = rand_word();
  endtask

  task automatic model();
    int y, xx, xv;
    longint sum, d;
    exp_sat = 0;
    for (int co = 0; co < rt_c_s; co++)
      for (int e = 0; e < rt_e_s; e++)
        for (int f = 0; f < rt_f_s; f++) begin
          sum = 0;
          for (int ci = 0; ci < rt_c_i; ci++)
            for (int r = 0; r < rt_r; r++)
              for (int s = 0; s < rt_s; s++) begin
                y = e*U + r - PAD; xx = f*U + s - PAD;
                if (y >= 0 && y < H && xx >= 0 && xx < W) begin
                  int wi = ((co*C_I + ci)*R + r)*S + s;
                  sum += shift_ref(in_m[(ci*H + y)*W + xx], sw_sc[wi], sw_p[wi]);
                end else n_pad++;
              end
          if (sum > SMAX || sum < SMIN) exp_sat++;
          mid_m[(co*E_S + e)*F_S + f] = (sum > SMAX) ? int'(SMAX) : (sum < SMIN) ? int'(SMIN) : int'(sum);
        end
    gq_w.delete(); gq_dw.delete(); gq_dx.delete();
    for (int co = 0; co < rt_c_a; co++)
      for (int e = 0; e < rt_e_a; e++)
        for (int f = 0; f < rt_f_a; f++) begin
          sum = 0;
          for (int ci = 0; ci < rt_c_s; ci++)
            for (int r = 0; r < rt_ra; r++)
              for (int s = 0; s < rt_sa; s++) begin
                int wi = ((co*C_S + ci)*RA + r)*SA + s;
                y = e + r - PAD_A; xx = f + s - PAD_A;
                xv = (y >= 0 && y < E_S && xx >= 0 && xx < F_S) ? mid_m[(ci*E_S + y)*F_S + xx] : 0;
                d = longint'(xv) - aw_m[wi];
                sum -= (d < 0) ? -d : d;
                gq_w.push_back(wi);
                gq_dw.push_back(d);
                gq_dx.push_back((d > 16) ? 16 : (d < -16) ? -16 : d);   // HardTanh, 1.0 = 2^FRAC_W
              end
          out_m[(co*E_A + e)*F_A + f] = sum;
        end
  endtask

  task automatic load(load_sel_e sel, int addr, int data);
    @(negedge clk);
    load_en = 1'b1; load_sel = sel; load_addr = LD_AW'(addr); load_data = DW'(data);
    @(negedge clk);
    load_en = 1'b0;
  endtask

  task automatic load_all();
    shift_w_t sw;
    for (int i = 0; i < IN_D; i++) load(LOAD_INPUT, i, in_m[i]);
    for (int i = 0; i < SW_D; i++) begin
      sw.sgn = sign_e'(sw_sc[i]); sw.p = P_W'(sw_p[i]);
      load(LOAD_SHIFT_W, i, int'(sw));
    end
    for (int i = 0; i < AW_D; i++) load(LOAD_ADD_W, i, aw_m[i]);
  endtask

  task automatic run_layer(bit tr);
    int cyc = 0, gi = 0;
    @(negedge clk);
    start = 1'b1; train = tr;
    @(posedge clk);
    @(negedge clk);
    start = 1'b0;
    forever begin
      @(posedge clk);
      cyc++;
      if (grad_valid) begin
        if (gi < gq_w.size()) begin
          check("grad_w_addr", grad_w_addr, gq_w[gi]);
          check("grad_d_w", grad_d_w, gq_dw[gi]);
          check("grad_d_x", grad_d_x, gq_dx[gi]);
          if (gq_dx[gi] != gq_dw[gi]) n_clip++;
        end
        gi++;
        n_grad++;
      end
      if (done) break;
    end
    check("latency start->done", cyc, N_S + N_A + 7);
    check("gradient pairs", gi, tr ? N_A : 0);
    check("saturation count", shift_sat_count, exp_sat);
    n_sat += shift_sat_count;
    @(posedge clk);
    check("idle after done", busy, 0);
    // read back the whole output map
    for (int a = 0; a < OUT_D; a++) begin
      @(negedge clk);
      out_raddr = OUT_AW'(a);
      @(negedge clk);
      check($sformatf("O[%0d]", a), out_rdata, out_m[a]);
    end
  endtask

  task automatic bwd_test(int n);
    int gi, xi, sc, p, fx;
    longint e_ds;
    for (int i = 0; i < n; i++) begin
      gi = $urandom_range(511) - 256; xi = $urandom_range(255) - 128;
      sc = $urandom_range(3); p = $urandom_range(15) - 8; fx = $urandom_range(1);
      @(negedge clk);
      bwd_valid = 1'b1; bwd_fixed_shift = fx[0];
      bwd_g = (DW+1)'(gi); bwd_x = DW'(xi); bwd_w.sgn = sign_e'(sc); bwd_w.p = P_W'(p);
      @(negedge clk);
      bwd_valid = 1'b0;
      e_ds = fdiv(longint'(gi) * xi, 16);
      check("bwd x_valid", bwd_x_valid, 1);
      check("bwd d_x", bwd_d_x, shift_ref(gi, sc, p));
      check("bwd w_valid", bwd_w_valid, !fx);
      if (fx) begin
        n_fixed_skip++;
        check("bwd d_s frozen", bwd_d_s, 0);
        check("bwd d_p frozen", bwd_d_p, 0);
      end else begin
        n_learn_grad++;
        check("bwd d_s", bwd_d_s, e_ds);
        check("bwd d_p", bwd_d_p, fdiv(shift_ref(e_ds, sc, p) * 45426, 65536));
      end
    end
  endtask

  initial begin
    rt_c_i = C_I; rt_r = R; rt_s = S; rt_c_s = C_S; rt_ra = RA; rt_sa = SA;
    rt_e_s = E_S; rt_f_s = F_S; rt_c_a = C_A; rt_e_a = E_A; rt_f_a = F_A;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < N_RUNS; run++) begin
      if (run % 3 == 0)      make_data(-3, 2);
      else if (run % 3 == 1) make_data(-8, 7);
      else                   make_data(2, 7);
      model();
      load_all();
      run_layer(run % 3 != 0);
    end
    bwd_test(200);
    $display("mechanisms: padding=%0d pruned=%0d left_shift=%0d right_shift=%0d saturated=%0d grads=%0d ht_clipped=%0d frozen_skip=%0d learnable_grads=%0d",
             n_pad, n_pruned, n_lsh, n_rsh, n_sat, n_grad, n_clip, n_fixed_skip, n_learn_grad);
    if (n_pad == 0 && (PAD > 0 || PAD_A > 0)) begin failures++; $display("never: padding"); end
    if (n_pruned == 0)     begin failures++; $display("never: pruned weight"); end
    if (n_lsh == 0)        begin failures++; $display("never: left shift"); end
    if (n_rsh == 0)        begin failures++; $display("never: right shift"); end
    if (n_sat == 0)        begin failures++; $display("never: saturation"); end
    if (n_grad == 0)       begin failures++; $display("never: gradient output"); end
    if (n_clip == 0)       begin failures++; $display("never: HardTanh clip"); end
    if (n_fixed_skip == 0) begin failures++; $display("never: frozen shift"); end
    if (n_learn_grad == 0) begin failures++; $display("never: learnable shift grads"); end
    checks += 9;
    $display("DW=%0d shape %0dx%0dx%0d -> %0d -> %0d: runs=%0d", DW, C_I, H, W, C_S, C_A, N_RUNS);
    finished = 1'b1;
    if (REPORT) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
