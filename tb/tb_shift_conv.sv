// tb_shift_conv: runs the shift-layer engine on small random layers (stride 2,
// padding 1, non-square map) and compares every written result, its address, the
// saturation flag and the number of cycles from start to done (N + 2) with a
// model that evaluates the shift-layer sum with integer multiplication by s * 2^p.
// One run uses large exponents so that saturation to 8 bits must occur.
module tb_shift_conv;
  import shiftadd_pkg::*;

  localparam int C_I = 2, H = 5, W = 6, C_O = 3, R = 3, S = 3, U = 2, PAD = 1;
  localparam int E = (H + 2*PAD - R) / U + 1, F = (W + 2*PAD - S) / U + 1;
  localparam int XD = C_I*H*W, WD = C_O*C_I*R*S, OD = C_O*E*F;
  localparam int N = OD * C_I * R * S;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done, o_we, o_sat;
  logic [$clog2(XD)-1:0] x_raddr;
  logic [$clog2(WD)-1:0] w_raddr;
  logic [$clog2(OD)-1:0] o_waddr;
  logic signed [DATA_W-1:0] x_rdata, o_wdata;
  shift_w_t w_rdata;

  logic signed [DATA_W-1:0] xmem [XD];
  shift_w_t                 wmem [WD];
  int expv [OD];
  bit exps [OD];
  bit seen [OD];
  int checks = 0, failures = 0, n_sat = 0, n_pos = 0, n_neg = 0, n_zero = 0, n_rsh = 0, n_lsh = 0;

  shift_conv #(.C_I(C_I), .H(H), .W(W), .C_O(C_O), .R(R), .S(S), .U(U), .PAD(PAD)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    x_rdata <= xmem[x_raddr];
    w_rdata <= wmem[w_raddr];
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic int term(int xv, shift_w_t wv);
    int p = int'(wv.p);
    int m = (p >= 0) ? xv * (1 << p) : int'($floor(real'(xv) / real'(1 << (-p))));
    case (wv.sgn)
      SIGN_POS: return m;
      SIGN_NEG: return -m;
      default:  return 0;
    endcase
  endfunction

  task automatic run(int pmin, int pmax);
    int sum, y, xx, cyc, writes;
    for (int i = 0; i < XD; i++) xmem[i] = DATA_W'($urandom);
    for (int i = 0; i < WD; i++) begin
      wmem[i].sgn = sign_e'($urandom_range(3));
      wmem[i].p   = P_W'($urandom_range(pmax - pmin) + pmin);
      case (wmem[i].sgn) SIGN_POS: n_pos++; SIGN_NEG: n_neg++; default: n_zero++; endcase
      if (wmem[i].p < 0) n_rsh++; else if (wmem[i].p > 0) n_lsh++;
    end
    for (int co = 0; co < C_O; co++)
      for (int e = 0; e < E; e++)
        for (int f = 0; f < F; f++) begin
          sum = 0;
          for (int ci = 0; ci < C_I; ci++)
            for (int r = 0; r < R; r++)
              for (int s = 0; s < S; s++) begin
                y  = e*U + r - PAD;
                xx = f*U + s - PAD;
                if (y >= 0 && y < H && xx >= 0 && xx < W)
                  sum += term(xmem[(ci*H + y)*W + xx], wmem[((co*C_I + ci)*R + r)*S + s]);
              end
          exps[(co*E + e)*F + f] = (sum > 127) || (sum < -128);
          expv[(co*E + e)*F + f] = (sum > 127) ? 127 : (sum < -128) ? -128 : sum;
          seen[(co*E + e)*F + f] = 0;
        end
    @(negedge clk);
    start = 1'b1;
    @(posedge clk);
    cyc = 0; writes = 0;
    @(negedge clk);
    start = 1'b0;
    forever begin
      @(posedge clk);
      cyc++;
      if (o_we) begin
        writes++;
        check("write address in range", int'(o_waddr) < OD, 1);
        if (int'(o_waddr) < OD) begin
          check("no double write", seen[o_waddr], 0);
          seen[o_waddr] = 1;
          check($sformatf("O[%0d]", o_waddr), int'(o_wdata), expv[o_waddr]);
          check("sat flag", o_sat, exps[o_waddr]);
          if (o_sat) n_sat++;
        end
      end
      if (done) break;
      if (cyc > N + 100) break;
    end
    check("latency start->done", cyc, N + 2);
    check("writes", writes, OD);
    @(posedge clk);
    check("idle after done", busy, 0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(-3, 2);     // small shifts, like the example kernel (>>2 .. <<2)
    run(-8, 7);     // full exponent range
    run(3, 7);      // large left shifts: saturation
    checks++;
    if (n_sat == 0 || n_pos == 0 || n_neg == 0 || n_zero == 0 || n_rsh == 0 || n_lsh == 0) failures++;
    $display("saturated=%0d pos=%0d neg=%0d zero=%0d rsh=%0d lsh=%0d", n_sat, n_pos, n_neg, n_zero, n_rsh, n_lsh);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
