// tb_shift_backward_unit: random vectors against a real-arithmetic model of
//   d_x = g * s * 2^p,  d_s = g * x,  d_p = g * x * s * 2^p * ln2
// (fixed point, FRAC_W fractional bits, truncation towards minus infinity at each
// rescaling step, ln2 represented as 45426 / 65536), with learnable and frozen
// (fixed_shift) shift layers. Checks the one-cycle latency of the valid flags.
module tb_shift_backward_unit;
  import shiftadd_pkg::*;

  localparam int G_W = DATA_W + 1;

  logic                     clk = 1'b0, rst_n = 1'b0;
  logic                     in_valid, fixed_shift;
  logic signed [G_W-1:0]    g;
  logic signed [DATA_W-1:0] x;
  shift_w_t                 w;
  logic                     x_valid, w_valid;
  logic signed [ACC_W-1:0]  d_x, d_s, d_p;
  int checks = 0, failures = 0, n_fixed = 0, n_learn = 0;

  shift_backward_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint fdiv(longint a, longint d);   // floor(a / d), d > 0
    return (a >= 0) ? a / d : -((-a + d - 1) / d);
  endfunction

  function automatic longint shift_ref(longint v, int sc, int p);
    longint m;
    m = (p >= 0) ? v * (longint'(1) << p) : fdiv(v, longint'(1) << (-p));
    case (sc)
      1:       return m;
      3:       return -m;
      default: return 0;
    endcase
  endfunction

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    int gi, xi, sc, p, fx;
    longint e_dx, e_ds, e_gxw, e_dp;
    in_valid = 0; fixed_shift = 0; g = '0; x = '0; w = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      gi = $urandom_range(2**G_W - 1) - 2**(G_W-1);
      xi = $urandom_range(2**DATA_W - 1) - 2**(DATA_W-1);
      sc = $urandom_range(3);
      p  = $urandom_range(2**P_W - 1) - 2**(P_W-1);
      fx = $urandom_range(1);
      g = G_W'(gi); x = DATA_W'(xi); w.sgn = sign_e'(sc[1:0]); w.p = P_W'(p);
      fixed_shift = fx[0];
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      e_dx  = shift_ref(gi, sc, p);
      e_ds  = fdiv(longint'(gi) * xi, longint'(1) << FRAC_W);
      e_gxw = shift_ref(e_ds, sc, p);
      e_dp  = fdiv(e_gxw * 45426, 65536);
      check("x_valid", x_valid, 1);
      check("d_x", d_x, e_dx);
      if (fx) begin
        n_fixed++;
        check("w_valid(fixed)", w_valid, 0);
        check("d_s(fixed)", d_s, 0);
        check("d_p(fixed)", d_p, 0);
      end else begin
        n_learn++;
        check("w_valid", w_valid, 1);
        check("d_s", d_s, e_ds);
        check("d_p", d_p, e_dp);
      end
      @(negedge clk);
      check("x_valid low", x_valid, 0);
    end
    checks++;
    if (n_fixed == 0 || n_learn == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
