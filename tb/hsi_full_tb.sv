// hsi_full_tb: one complete classification with the network of the
// reference configuration at full size and the accelerator at its default
// parameters: a 5x5x220 input patch, 3x3 Block 1 (220 -> 220 channels),
// Nb = 4 bands of 9x55, Block 2 to 1x47x4 per band, concatenation of 752,
// FC 752 -> 120 -> 9. Scores, label and hidden layer are compared with a
// plain model; the cycle count per pixel is printed.
module hsi_full_tb;
`include "hsi_net_common.svh"

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset_dut();
    run_net("5x5x220 Nb=4", 220, 5, 4, 120, 9);
    require("3x3 conv layer", n_conv3);
    require("FC layer", n_fc);
    require("band-split layer", n_banded);
    require("multi-block conv layer", n_multiblk);
    require("weight pre-fetch during compute", n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
