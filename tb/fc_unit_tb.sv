// fc_unit_tb: checks the FC unit with P_F = 8 lanes.
//
// Each pass loads biases, then streams NIN input elements with random weight
// words; lane l must equal bias_l*2^FRAC + sum_j x_j * w_{l,j}. Checks that
// res_valid follows the last token by two cycles.
module fc_unit_tb;
  import hsi_pkg::*;
  localparam int P_F = 8, LANES = 18;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 0, in_bias = 0, in_last = 0;
  data_t x = '0;
  logic [LANES*DATA_W-1:0] wword = '0;
  acc_t acc [P_F];
  logic res_valid;
  int checks = 0, failures = 0;

  fc_unit #(.P_F(P_F), .LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_pass(input int nin);
    longint exp [P_F];
    int lat;
    @(negedge clk);
    in_valid = 1; in_bias = 1; in_last = 0;
    for (int l = 0; l < LANES; l++) wword[l*16 +: 16] = 16'($urandom);
    for (int l = 0; l < P_F; l++) exp[l] = longint'(data_t'(wword[l*16 +: 16])) * 256;
    for (int j = 0; j < nin; j++) begin
      @(negedge clk);
      in_bias = 0; in_last = (j == nin - 1);
      x = data_t'($urandom);
      for (int l = 0; l < LANES; l++) wword[l*16 +: 16] = 16'($urandom);
      for (int l = 0; l < P_F; l++) exp[l] += longint'(x) * longint'(data_t'(wword[l*16 +: 16]));
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    lat = 1;
    while (!res_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 2) failures++;
    for (int l = 0; l < P_F; l++) begin
      checks++;
      if (longint'(acc[l]) != exp[l]) begin
        failures++; $display("lane %0d got %0d exp %0d", l, acc[l], exp[l]);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20; t++) run_pass(1 + 7 * t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
