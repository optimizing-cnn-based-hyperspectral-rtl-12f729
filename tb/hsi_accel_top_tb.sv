// hsi_accel_top_tb: end-to-end test of the accelerator at its default
// parameters on two reduced networks: a 3x3 patch with a 1x1 Block 1
// (24 bands, Nb = 2) and a 5x5 patch with a 3x3 Block 1 (72 bands, Nb = 4,
// so Block 1 needs two filter blocks of the CONV unit). Class scores, label
// and hidden layer are compared with a plain model, and every mechanism of
// the design must occur at least once (see hsi_net_common.svh).
module hsi_accel_top_tb;
`include "hsi_net_common.svh"

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset_dut();
    run_net("small 1x1", 24, 3, 2, 16, 5);
    run_net("small 3x3", 72, 5, 4, 40, 9);
    require("1x1 block-1 layer", n_conv1);
    require("3x3 conv layer", n_conv3);
    require("FC layer", n_fc);
    require("band-split layer", n_banded);
    require("multi-block conv layer", n_multiblk);
    require("ReLU clipping", n_relu_clip);
    require("weight pre-fetch during compute", n_overlap);
    require("stall waiting for weights", n_stall);
    require("DDR wait cycles", n_ddr_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
