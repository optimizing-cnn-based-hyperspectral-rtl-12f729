// conv_kernel_tb: checks one CONV kernel against a direct computation.
//
// Random passes in both modes: a bias token followed by NCH data tokens. In
// 3x3 mode the expected acc[0] is bias*2^FRAC + sum over channels of the
// nine-term dot product; in 1x1 mode each acc[i] is bias*2^FRAC + sum of
// x[i]*w[0]. The result must be flagged by out_valid exactly two cycles after
// the last token.
module conv_kernel_tb;
  import hsi_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 0, in_bias = 0, in_last = 0, mode_1x1 = 0;
  data_t x [9];
  data_t w [9];
  acc_t  acc [9];
  logic  out_valid;
  int checks = 0, failures = 0;

  conv_kernel dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_pass(input bit m1, input int nch);
    longint exp [9];
    int b, lat;
    b = $urandom_range(0, 65535) - 32768;
    for (int i = 0; i < 9; i++) exp[i] = longint'(b) * 256;
    @(negedge clk);
    mode_1x1 = m1; in_valid = 1; in_bias = 1; in_last = 0;
    for (int i = 0; i < 9; i++) begin w[i] = data_t'(b); x[i] = data_t'($urandom); end
    for (int ch = 0; ch < nch; ch++) begin
      @(negedge clk);
      in_bias = 0; in_last = (ch == nch - 1);
      for (int i = 0; i < 9; i++) begin
        x[i] = data_t'($urandom); w[i] = data_t'($urandom);
      end
      for (int i = 0; i < 9; i++) begin
        if (m1) exp[i] += longint'(x[i]) * longint'(w[0]);
        else    exp[0] += longint'(x[i]) * longint'(w[i]);
      end
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 2) begin failures++; $display("latency %0d", lat); end
    for (int i = 0; i < (m1 ? 9 : 1); i++) begin
      checks++;
      if (longint'(acc[i]) != exp[i]) begin
        failures++; $display("mode %0d acc[%0d]=%0d exp %0d", m1, i, acc[i], exp[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 9; i++) begin x[i] = '0; w[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) run_pass(t[0], 1 + t % 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
