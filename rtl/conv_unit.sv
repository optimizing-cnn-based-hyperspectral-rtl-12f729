// conv_unit: the CONV computation unit, P_C conv_kernels working in parallel.
//
// All kernels receive the same input window (nine features: a 3x3 window of
// one input channel, or nine neighbouring pixels in 1x1 mode) and each takes
// its own slice of the current weight word, so kernel k computes output
// filter (block*P_C + k). Weight lanes: in 3x3 mode kernel k uses lanes
// 9k..9k+8 (tap order row-major), in 1x1 mode it uses lane k; a bias token
// takes the bias from the same first lane. In 1x1 mode the unit performs
// 9*P_C MACs per cycle, in 3x3 mode P_C 3x3 convolution terms.
// Timing is that of conv_kernel: res_valid two cycles after the last token.
// Kernel count and the 1x1 reuse follow the paper; the lane layout is this
// design's choice.
module conv_unit
  import hsi_pkg::*;
#(
  parameter int P_C   = 64,
  parameter int LANES = 9 * P_C
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_bias,
  input  logic                    in_last,
  input  logic                    mode_1x1,
  input  data_t                   x [9],
  input  logic [LANES*DATA_W-1:0] wword,
  output acc_t                    acc [P_C][9],
  output logic                    res_valid
);
  logic [P_C-1:0] kv;

  for (genvar k = 0; k < P_C; k++) begin : g_k
    data_t w [9];
    always_comb begin
      for (int i = 0; i < 9; i++)
        w[i] = wword[(9*k+i)*DATA_W +: DATA_W];
      if (mode_1x1) w[0] = wword[k*DATA_W +: DATA_W];
    end
    conv_kernel u_kernel (
      .clk, .rst_n, .in_valid, .in_bias, .in_last, .mode_1x1,
      .x, .w, .acc(acc[k]), .out_valid(kv[k])
    );
  end

  assign res_valid = kv[0];
endmodule
