// tb_shift_unit: exhaustive check of the shift product x * s * 2^p.
// Every 8-bit x, every 2-bit sign code (including the unused code, read as zero)
// and every exponent is applied; the expected value is computed with integer
// multiplication and floor division, not with shift operators.
module tb_shift_unit;
  import shiftadd_pkg::*;

  logic signed [DATA_W-1:0] x;
  shift_w_t                 w;
  logic signed [ACC_W-1:0]  y;
  int checks = 0, failures = 0;

  shift_unit dut (.x(x), .w(w), .y(y));

  function automatic int ref_val(int xi, int sc, int p);
    int m, d;
    if (p >= 0) m = xi * (1 << p);
    else begin
      d = 1 << (-p);
      m = (xi >= 0) ? xi / d : -((-xi + d - 1) / d);   // floor(xi / d)
    end
    case (sc)
      1:       return m;
      3:       return -m;
      default: return 0;
    endcase
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int xi = -(1 << (DATA_W-1)); xi < (1 << (DATA_W-1)); xi++)
      for (int sc = 0; sc < 4; sc++)
        for (int p = -(1 << (P_W-1)); p < (1 << (P_W-1)); p++) begin
          x     = DATA_W'(xi);
          w.sgn = sign_e'(sc[1:0]);
          w.p   = P_W'(p);
          #1;
          checks++;
          if (int'(y) != ref_val(xi, sc, p)) begin
            failures++;
            if (failures < 10) $display("FAIL x=%0d s=%0d p=%0d y=%0d exp=%0d", xi, sc, p, y, ref_val(xi, sc, p));
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
