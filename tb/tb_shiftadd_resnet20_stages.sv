// tb_shiftadd_resnet20_stages: the layer at the shapes of the two downsampling
// layers of ResNet-20 on CIFAR (the first stage, 16 channels at 32 x 32, is
// covered by tb_shiftadd_layer_full), FIX8, one training run each:
//   stage 2: 16 x 32 x 32 -> shift 3 x 3 stride 2 -> 32 x 16 x 16 -> add 3 x 3 -> 32 x 16 x 16
//   stage 3: 32 x 16 x 16 -> shift 3 x 3 stride 2 -> 64 x 8 x 8  -> add 3 x 3 -> 64 x 8 x 8
// Each shape is a separately parameterised instance, as the layer's shape is fixed
// at elaboration. Both checkers run side by side; this module sums their counts.
module tb_shiftadd_resnet20_stages;
  shiftadd_layer_check #(
    .C_I(16), .H(32), .W(32), .C_S(32), .R(3), .S(3), .U(2), .PAD(1),
    .C_A(32), .RA(3), .SA(3), .PAD_A(1), .DW(8), .AW(32),
    .N_RUNS(2), .MAX_CYCLES(8000000), .REPORT(1'b0)
  ) u_stage2 ();

  shiftadd_layer_check #(
    .C_I(32), .H(16), .W(16), .C_S(64), .R(3), .S(3), .U(2), .PAD(1),
    .C_A(64), .RA(3), .SA(3), .PAD_A(1), .DW(8), .AW(32),
    .N_RUNS(2), .MAX_CYCLES(8000000), .REPORT(1'b0)
  ) u_stage3 ();

  initial begin
    fork
      wait (u_stage2.finished);
      wait (u_stage3.finished);
    join
    $display("TB_RESULT checks=%0d failures=%0d",
             u_stage2.checks + u_stage3.checks, u_stage2.failures + u_stage3.failures);
    $finish;
  end

  initial begin
    #200000000;
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
