// tb_add_unit: exhaustive check of x - w and -|x - w| for all 8-bit operand pairs.
module tb_add_unit;
  import shiftadd_pkg::*;

  logic signed [DATA_W-1:0] x, w;
  logic signed [DATA_W:0]   diff, neg_abs;
  int checks = 0, failures = 0;

  add_unit dut (.x(x), .w(w), .diff(diff), .neg_abs(neg_abs));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d, a;
    for (int xi = -(1 << (DATA_W-1)); xi < (1 << (DATA_W-1)); xi++)
      for (int wi = -(1 << (DATA_W-1)); wi < (1 << (DATA_W-1)); wi++) begin
        x = DATA_W'(xi);
        w = DATA_W'(wi);
        #1;
        d = xi - wi;
        a = (d < 0) ? d : -d;
        checks += 2;
        if (int'(diff) != d)    failures++;
        if (int'(neg_abs) != a) failures++;
        if ((int'(diff) != d || int'(neg_abs) != a) && failures < 10)
          $display("FAIL x=%0d w=%0d diff=%0d neg_abs=%0d", xi, wi, diff, neg_abs);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
