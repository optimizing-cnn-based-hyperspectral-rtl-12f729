// fc_unit: the FC computation unit, P_F multiply-accumulate lanes.
//
// Each lane owns one row of the weight matrix (one output neuron). Every
// cycle one element x of the input feature vector is broadcast and lane l
// multiplies it by lane l of the current weight word and accumulates, so P_F
// dot products advance together, one input element per cycle. A bias token
// (in_bias) loads bias<<FRAC with the bias taken from the lane itself.
// Timing: stage 1 registers the products, stage 2 accumulates; res_valid
// pulses two cycles after the token flagged in_last.
// P_F = 256 multipliers follows the paper; the row-per-lane mapping is this
// design's reading of "the dot product between each row of the weight matrix
// and the feature vector in parallel".
module fc_unit
  import hsi_pkg::*;
#(
  parameter int P_F   = 256,
  parameter int LANES = 576
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_bias,
  input  logic                    in_last,
  input  data_t                   x,
  input  logic [LANES*DATA_W-1:0] wword,
  output acc_t                    acc [P_F],
  output logic                    res_valid
);
  logic signed [PROD_W-1:0] prod [P_F];
  data_t s1_b [P_F];
  logic  s1_valid, s1_bias, s1_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_bias <= 1'b0; s1_last <= 1'b0;
      for (int l = 0; l < P_F; l++) begin prod[l] <= '0; s1_b[l] <= '0; end
    end else begin
      s1_valid <= in_valid;
      s1_bias  <= in_bias;
      s1_last  <= in_last;
      for (int l = 0; l < P_F; l++) begin
        prod[l] <= data_t'(wword[l*DATA_W +: DATA_W]) * x;
        s1_b[l] <= data_t'(wword[l*DATA_W +: DATA_W]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < P_F; l++) acc[l] <= '0;
      res_valid <= 1'b0;
    end else begin
      res_valid <= s1_valid && s1_last;
      if (s1_valid)
        for (int l = 0; l < P_F; l++)
          acc[l] <= s1_bias ? (acc_t'(s1_b[l]) <<< FRAC) : acc[l] + acc_t'(prod[l]);
    end
  end
endmodule
