// tb_shiftadd_layer_fix32: the end-to-end layer test in the FIX32 format (32-bit words,
// 48-bit accumulators so that no layer sum can overflow): 2 -> 3 -> 2 channels,
// 6 x 6 input, 3 x 3 kernels, stride 2.
// The checks are those of shiftadd_layer_check; this module only chooses the
// layer shape and number format, and stops the simulation if the checker hangs.
module tb_shiftadd_layer_fix32;
  shiftadd_layer_check #(.C_I(2), .H(6), .W(6), .C_S(3), .R(3), .S(3), .U(2), .PAD(1), .C_A(2), .RA(3), .SA(3), .PAD_A(1), .DW(32), .AW(48), .N_RUNS(3), .MAX_CYCLES(200000)) u_check ();

  initial begin
    #3000000;
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
