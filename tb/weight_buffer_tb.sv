// weight_buffer_tb: checks the two weight banks (LANES 36, depth 32, BEAT 4).
//
// Words are written beat by beat at lane offsets into both banks with
// different contents; reading every word of either bank must return the
// assembled word, which shows that the banks are independent, that lane
// offsets land where they should, and that reads of one bank are not
// disturbed by writes to the other in the same cycle.
module weight_buffer_tb;
  import hsi_pkg::*;
  localparam int LANES = 36, WDEPTH = 32, BEAT = 4;
  logic clk = 1'b0;
  logic we = 0, wbank = 0, rbank = 0;
  logic [4:0] waddr = '0, raddr = '0;
  logic [5:0] wlane = '0;
  logic [BEAT*16-1:0] wdata = '0;
  logic [LANES*16-1:0] rdata;
  logic [LANES*16-1:0] ref_mem [2][WDEPTH];
  int checks = 0, failures = 0;

  weight_buffer #(.LANES(LANES), .WDEPTH(WDEPTH), .BEAT(BEAT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < WDEPTH; a++)
        for (int l = 0; l < LANES; l += BEAT) begin
          @(negedge clk);
          we = 1; wbank = b[0]; waddr = 5'(a); wlane = 6'(l);
          wdata = {$urandom, $urandom};
          ref_mem[b][a][l*16 +: BEAT*16] = wdata;
        end
    @(negedge clk); we = 0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      rbank = t[0]; raddr = 5'($urandom);
      // a concurrent write to the other bank must not disturb the read
      we = 1; wbank = ~rbank; waddr = raddr; wlane = 6'(4 * $urandom_range(0, 8));
      wdata = {$urandom, $urandom};
      @(posedge clk);
      ref_mem[wbank][waddr][wlane*16 +: BEAT*16] = wdata;
      @(negedge clk);
      we = 0;
      checks++;
      if (rdata !== ref_mem[rbank][raddr]) begin failures++; $display("bank %0d addr %0d", rbank, raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
