// hsi_datasets_tb: one classification for each of the four benchmark
// dataset configurations, with the accelerator at its default parameters:
//   Indian Pines  3x3x220 patch, 1x1 Block 1, Nb = 4, 11 classes
//   Salinas       3x3x224 patch, 1x1 Block 1, Nb = 8, 16 classes
//   KSC           5x5x176 patch, 3x3 Block 1, Nb = 8, 13 classes
//   Botswana      5x5x144 patch, 3x3 Block 1, Nb = 8, 14 classes
// The hidden FC layer has 120 neurons in all four. Inputs and weights are
// random (no trained network is available here), so this checks that each
// configuration fits and computes exactly what the model computes, and it
// reports the cycles per pixel.
module hsi_datasets_tb;
`include "hsi_net_common.svh"

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset_dut();
    run_net("Indian Pines", 220, 3, 4, 120, 11);
    run_net("Salinas", 224, 3, 8, 120, 16);
    run_net("KSC", 176, 5, 8, 120, 13);
    run_net("Botswana", 144, 5, 8, 120, 14);
    require("1x1 block-1 layer", n_conv1);
    require("3x3 conv layer", n_conv3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
