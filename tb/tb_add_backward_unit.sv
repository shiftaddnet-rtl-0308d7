// tb_add_backward_unit: exhaustive check of dO/dw = x - w and dO/dx = HardTanh(x - w)
// for all 8-bit operand pairs; HardTanh is evaluated in real arithmetic on the
// value the fixed-point word represents (FRAC_W fractional bits).
module tb_add_backward_unit;
  import shiftadd_pkg::*;

  logic signed [DATA_W-1:0] x, w;
  logic signed [DATA_W:0]   d_w, d_x;
  int checks = 0, failures = 0, clipped = 0;

  add_backward_unit dut (.x(x), .w(w), .d_w(d_w), .d_x(d_x));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  d, ht;
    real v;
    for (int xi = -(1 << (DATA_W-1)); xi < (1 << (DATA_W-1)); xi++)
      for (int wi = -(1 << (DATA_W-1)); wi < (1 << (DATA_W-1)); wi++) begin
        x = DATA_W'(xi);
        w = DATA_W'(wi);
        #1;
        d = xi - wi;
        v = real'(d) / real'(1 << FRAC_W);
        if (v > 1.0)       begin v = 1.0;  clipped++; end
        else if (v < -1.0) begin v = -1.0; clipped++; end
        ht = int'(v * real'(1 << FRAC_W));
        checks += 2;
        if (int'(d_w) != d || int'(d_x) != ht) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d w=%0d d_w=%0d d_x=%0d exp %0d %0d", xi, wi, d_w, d_x, d, ht);
        end
      end
    checks++;
    if (clipped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
