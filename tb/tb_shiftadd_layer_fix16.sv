// tb_shiftadd_layer_fix16: the end-to-end layer test in the FIX16 format (16-bit words,
// 32-bit accumulators): 3 -> 4 -> 2 channels, 7 x 7 input, 3 x 3 kernels, stride 1.
// The checks are those of shiftadd_layer_check; this module only chooses the
// layer shape and number format, and stops the simulation if the checker hangs.
module tb_shiftadd_layer_fix16;
  shiftadd_layer_check #(.C_I(3), .H(7), .W(7), .C_S(4), .R(3), .S(3), .U(1), .PAD(1), .C_A(2), .RA(3), .SA(3), .PAD_A(1), .DW(16), .AW(32), .N_RUNS(3), .MAX_CYCLES(400000)) u_check ();

  initial begin
    #5000000;
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
