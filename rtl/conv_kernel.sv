// conv_kernel: one computational kernel of the CONV unit.
//
// Nine multipliers feed an adder tree that forms one 3x3 convolution term
// per cycle (x window times w filter slice of one input channel); the sum is
// accumulated over input channels. In 1x1 mode the adder tree is bypassed:
// the nine products belong to nine different output pixels that share one
// weight w[0], and each is accumulated in its own accumulator, so the kernel
// does nine 1x1 MACs per cycle.
//
// Interface: a token (in_valid) is either a bias token (in_bias=1), which
// loads bias<<FRAC into the accumulator(s) with bias = w[0], or a data token.
// in_last marks the final token of a pass. Timing: stage 1 registers the
// products, stage 2 updates the accumulators; out_valid pulses two cycles
// after the last token entered, and acc then holds the pass result until the
// next bias token. In 3x3 mode only acc[0] is meaningful.
// The 9 multipliers, the adder tree and the 1x1 bypass follow the paper; the
// bias token, accumulator placement and two-stage pipeline are this design's.
module conv_kernel
  import hsi_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_bias,
  input  logic        in_last,
  input  logic        mode_1x1,
  input  data_t       x [9],
  input  data_t       w [9],
  output acc_t        acc [9],
  output logic        out_valid
);
  logic signed [PROD_W-1:0] prod [9];
  logic        s1_valid, s1_bias, s1_last, s1_1x1;
  data_t       s1_b;

  // stage 1: the nine multipliers (DSPs)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_bias <= 1'b0; s1_last <= 1'b0; s1_1x1 <= 1'b0; s1_b <= '0;
      for (int i = 0; i < 9; i++) prod[i] <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_bias  <= in_bias;
      s1_last  <= in_last;
      s1_1x1   <= mode_1x1;
      s1_b     <= w[0];
      for (int i = 0; i < 9; i++)
        prod[i] <= PROD_W'(mode_1x1 ? w[0] : w[i]) * PROD_W'(x[i]);
    end
  end

  // adder tree: 9 -> 5 -> 3 -> 2 -> 1
  acc_t t1 [5];
  acc_t t2 [3];
  acc_t t3 [2];
  acc_t tree;
  always_comb begin
    for (int i = 0; i < 4; i++) t1[i] = acc_t'(prod[2*i]) + acc_t'(prod[2*i+1]);
    t1[4] = acc_t'(prod[8]);
    t2[0] = t1[0] + t1[1];
    t2[1] = t1[2] + t1[3];
    t2[2] = t1[4];
    t3[0] = t2[0] + t2[1];
    t3[1] = t2[2];
    tree  = t3[0] + t3[1];
  end

  // stage 2: accumulate
  acc_t bias_q;
  assign bias_q = acc_t'(s1_b) <<< FRAC;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 9; i++) acc[i] <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= s1_valid && s1_last;
      if (s1_valid) begin
        if (s1_bias) begin
          for (int i = 0; i < 9; i++) acc[i] <= bias_q;
        end else if (s1_1x1) begin
          for (int i = 0; i < 9; i++) acc[i] <= acc[i] + acc_t'(prod[i]);
        end else begin
          acc[0] <= acc[0] + tree;
        end
      end
    end
  end
endmodule
