// tb_shiftadd_layer: end-to-end test of the ShiftAddNet layer at reduced size in the
// FIX8 format: 2 -> 3 -> 2 channels, 6 x 5 input, 3 x 3 kernels, shift stride 2,
// padding 1 in both layers, three runs (inference, training, saturating training).
// The checks are those of shiftadd_layer_check; this module only chooses the
// layer shape and number format, and stops the simulation if the checker hangs.
module tb_shiftadd_layer;
  shiftadd_layer_check #(.C_I(2), .H(6), .W(5), .C_S(3), .R(3), .S(3), .U(2), .PAD(1), .C_A(2), .RA(3), .SA(3), .PAD_A(1), .DW(8), .AW(32), .N_RUNS(3), .MAX_CYCLES(200000)) u_check ();

  initial begin
    #3000000;
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
