// tb_shiftadd_fc: a fully connected (classifier) shift/add layer pair: the
// 1 x 1 case of the layer with a 1 x 1 map and no padding, 64 inputs -> 32 shift
// outputs -> 10 classes, FIX8, as at the end of a ResNet-20 classifier.
// The checks are those of shiftadd_layer_check; this module only chooses the
// layer shape and number format, and stops the simulation if the checker hangs.
module tb_shiftadd_fc;
  shiftadd_layer_check #(.C_I(64), .H(1), .W(1), .C_S(32), .R(1), .S(1), .U(1), .PAD(0), .C_A(10), .RA(1), .SA(1), .PAD_A(0), .DW(8), .AW(32), .N_RUNS(3), .MAX_CYCLES(200000)) u_check ();

  initial begin
    #3000000;
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
