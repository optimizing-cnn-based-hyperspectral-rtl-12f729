// class_select_tb: checks the arg-max class selection.
//
// A model memory with one cycle of read latency holds random scores (with
// forced ties in some trials); label must be the first index of the maximum
// of the first n scores, best its value, scores[] the copies, and done must
// arrive n+3 cycles after start.
module class_select_tb;
  import hsi_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 0;
  logic [4:0] n = '0;
  logic [12:0] raddr;
  data_t rdata;
  logic done;
  logic [4:0] label;
  data_t best;
  data_t scores [16];
  data_t mem [32];
  int checks = 0, failures = 0;

  class_select dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) rdata <= mem[raddr[4:0]];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int nn, el, lat;
      data_t eb;
      nn = $urandom_range(1, 16);
      for (int i = 0; i < 32; i++) mem[i] = data_t'($urandom);
      if (t % 4 == 0) mem[$urandom_range(0, nn - 1)] = 16'sh7fff;
      if (t % 4 == 0) mem[$urandom_range(0, nn - 1)] = 16'sh7fff;
      if (t % 5 == 0) for (int i = 0; i < nn; i++) mem[i] = -16'sd5;
      el = 0; eb = mem[0];
      for (int i = 1; i < nn; i++) if (mem[i] > eb) begin eb = mem[i]; el = i; end
      @(negedge clk); n = 5'(nn); start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks += 3;
      if (int'(label) != el) begin failures++; $display("label %0d exp %0d", label, el); end
      if (best != eb) failures++;
      if (lat != nn + 3) begin failures++; $display("latency %0d n %0d", lat, nn); end
      for (int i = 0; i < nn; i++) begin checks++; if (scores[i] != mem[i]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
