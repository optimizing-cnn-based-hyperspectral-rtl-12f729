// requant_tb: checks the accumulator-to-feature conversion.
//
// Directed corner values (zero, exact multiples, just inside and outside the
// 16-bit range, negative values with and without ReLU) and random values are
// compared with floor(acc / 2^FRAC) clipped to [-32768, 32767], and with 0
// for negative results when ReLU is on.
module requant_tb;
  import hsi_pkg::*;
  acc_t  acc;
  logic  relu;
  data_t q;
  int checks = 0, failures = 0;

  requant dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input longint a, input bit r);
    longint e;
    e = a >>> 8;
    if (a < 0 && (a % 256) != 0) e = (a - 255) / 256;
    else e = a / 256;
    if (e > 32767) e = 32767;
    if (e < -32768) e = -32768;
    if (r && e < 0) e = 0;
    acc = acc_t'(a); relu = r;
    #1;
    checks++;
    if (longint'(q) != e) begin
      failures++; $display("acc=%0d relu=%0d q=%0d exp=%0d", a, r, q, e);
    end
  endtask

  initial begin
    longint v [10] = '{0, 256, -256, -1, 255, 32767*256, 32768*256, -32768*256, -32769*256, 1000000000};
    foreach (v[i]) begin check(v[i], 0); check(v[i], 1); end
    for (int t = 0; t < 2000; t++) begin
      longint a;
      a = longint'($urandom) - longint'(32'h8000_0000);
      a = (t % 3 == 0) ? a * 8 : a;
      check(a, t[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
