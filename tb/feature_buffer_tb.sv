// feature_buffer_tb: checks one feature bank (DEPTH 256, 9 read ports).
//
// Random writes are mirrored in a reference array; every cycle all nine
// ports read random addresses and the data returned one cycle later must
// match the reference contents as they were when the address was presented.
module feature_buffer_tb;
  import hsi_pkg::*;
  localparam int DEPTH = 256, NRD = 9;
  logic clk = 1'b0;
  logic we = 0;
  logic [7:0] waddr = '0;
  data_t wdata = '0;
  logic [7:0] raddr [NRD];
  data_t rdata [NRD];
  data_t ref_mem [DEPTH];
  data_t expq [NRD];
  int checks = 0, failures = 0;

  feature_buffer #(.DEPTH(DEPTH), .NRD(NRD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NRD; p++) raddr[p] = '0;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 8'(a); wdata = data_t'($urandom); ref_mem[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int p = 0; p < NRD; p++) begin
        raddr[p] = 8'($urandom);
        expq[p]  = ref_mem[raddr[p]];
      end
      we = t[0]; waddr = 8'($urandom); wdata = data_t'($urandom);
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
      @(negedge clk);
      for (int p = 0; p < NRD; p++) begin
        checks++;
        if (rdata[p] !== expq[p]) begin failures++; $display("port %0d addr %0d", p, raddr[p]); end
      end
      we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
