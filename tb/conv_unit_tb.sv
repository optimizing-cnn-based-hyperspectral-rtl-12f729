// conv_unit_tb: checks the CONV unit with a reduced kernel count (P_C = 4).
//
// Random weight words are driven for both modes; every kernel's result is
// compared with a direct computation using the documented lane layout
// (3x3: kernel k uses lanes 9k..9k+8; 1x1: kernel k uses lane k, one weight
// for all nine pixels). Checks that res_valid follows the last token by two
// cycles.
module conv_unit_tb;
  import hsi_pkg::*;
  localparam int P_C = 4, LANES = 9 * P_C;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 0, in_bias = 0, in_last = 0, mode_1x1 = 0;
  data_t x [9];
  logic [LANES*DATA_W-1:0] wword = '0;
  acc_t acc [P_C][9];
  logic res_valid;
  int checks = 0, failures = 0;

  conv_unit #(.P_C(P_C)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint lane(input int l);
    return longint'(data_t'(wword[l*16 +: 16]));
  endfunction

  task automatic run_pass(input bit m1, input int nch);
    longint exp [P_C][9];
    int lat;
    @(negedge clk);
    mode_1x1 = m1; in_valid = 1; in_bias = 1; in_last = 0;
    for (int l = 0; l < LANES; l++) wword[l*16 +: 16] = 16'($urandom);
    for (int k = 0; k < P_C; k++)
      for (int i = 0; i < 9; i++) exp[k][i] = lane(m1 ? k : 9*k) * 256;
    for (int ch = 0; ch < nch; ch++) begin
      @(negedge clk);
      in_bias = 0; in_last = (ch == nch - 1);
      for (int i = 0; i < 9; i++) x[i] = data_t'($urandom);
      for (int l = 0; l < LANES; l++) wword[l*16 +: 16] = 16'($urandom);
      for (int k = 0; k < P_C; k++)
        for (int i = 0; i < 9; i++)
          if (m1) exp[k][i] += longint'(x[i]) * lane(k);
          else    exp[k][0] += longint'(x[i]) * lane(9*k + i);
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    lat = 1;
    while (!res_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 2) failures++;
    for (int k = 0; k < P_C; k++)
      for (int i = 0; i < (m1 ? 9 : 1); i++) begin
        checks++;
        if (longint'(acc[k][i]) != exp[k][i]) begin
          failures++; $display("m1=%0d k=%0d i=%0d got %0d exp %0d", m1, k, i, acc[k][i], exp[k][i]);
        end
      end
  endtask

  initial begin
    for (int i = 0; i < 9; i++) x[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20; t++) run_pass(t[0], 1 + t % 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
