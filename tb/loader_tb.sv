// loader_tb: checks the DDR loader against a behavioural DDR model.
//
// The DDR model (with random wait cycles) holds random beats. Input requests
// of various lengths, including lengths that are not a multiple of a beat,
// must produce exactly `count` feature writes at addresses 0..count-1 whose
// values are the beat's 16-bit fields in order. Weight requests must write
// each beat to (word, lane) = (i / (lanes/8), 8 * (i mod lanes/8)) of the
// requested bank. Also checks the DDR request (address and beat count), that
// done pulses once per request, and that a weight beat is absorbed on every
// cycle the model offers one (no back-pressure).
module loader_tb;
  import hsi_pkg::*;
  localparam int BEAT_W = 128, BEAT = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid = 0, req_ready, done;
  ld_req_t req;
  logic ddr_req_valid, ddr_req_ready, ddr_rvalid, ddr_rready;
  logic [31:0] ddr_req_addr, ddr_req_beats;
  logic [BEAT_W-1:0] ddr_rdata;
  logic w_we, w_bank, f_we;
  logic [9:0] w_addr;
  logic [9:0] w_lane;
  logic [BEAT_W-1:0] w_data;
  logic [12:0] f_addr;
  data_t f_data;
  int checks = 0, failures = 0;

  loader dut (.*);
  ddr_model #(.BEAT_W(BEAT_W), .DEPTH(1024), .LAT(5), .GAPS(1'b1)) u_ddr (
    .clk, .rst_n, .ddr_req_valid, .ddr_req_ready, .ddr_req_addr, .ddr_req_beats,
    .ddr_rvalid, .ddr_rready, .ddr_rdata);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // record what the loader writes
  int nf, nw, ndone, stalls;
  data_t fseen [4096];
  always @(posedge clk) begin
    if (f_we) begin fseen[f_addr] <= f_data; nf <= nf + 1; end
    if (w_we) begin
      automatic int i = nw;
      automatic int bpw = int'(req.lanes) / BEAT;
      checks++;
      if (w_bank != req.bank || int'(w_addr) != i / bpw || int'(w_lane) != BEAT * (i % bpw)
          || w_data != u_ddr.mem[int'(req.ddr) + i]) begin
        failures++; $display("weight beat %0d: word %0d lane %0d", i, w_addr, w_lane);
      end
      nw <= nw + 1;
    end
    if (ddr_rvalid && !ddr_rready && req.kind == LD_WEIGHT) stalls <= stalls + 1;
    if (done) ndone <= ndone + 1;
  end

  task automatic run(input ld_kind_e k, input int addr, input int count, input int lanes, input bit bank);
    int exp_beats;
    @(negedge clk);
    nf = 0; nw = 0; ndone = 0; stalls = 0;
    req = '0; req.kind = k; req.ddr = 32'(addr); req.count = 16'(count);
    req.lanes = 16'(lanes); req.bank = bank;
    req_valid = 1;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    exp_beats = (k == LD_WEIGHT) ? count * lanes / BEAT : (count + BEAT - 1) / BEAT;
    while (!ddr_req_valid) @(negedge clk);
    checks++;
    if (int'(ddr_req_addr) != addr || int'(ddr_req_beats) != exp_beats) begin
      failures++; $display("ddr request %0d/%0d", ddr_req_addr, ddr_req_beats);
    end
    while (ndone == 0) @(negedge clk);
    repeat (12) @(negedge clk);
    checks++;
    if (ndone != 1) failures++;
    if (k == LD_INPUT) begin
      checks++;
      if (nf != count) begin failures++; $display("input writes %0d exp %0d", nf, count); end
      for (int v = 0; v < count; v++) begin
        checks++;
        if (fseen[v] != data_t'(u_ddr.mem[addr + v / BEAT][(v % BEAT)*16 +: 16])) begin
          failures++; $display("input value %0d", v);
        end
      end
    end else begin
      checks += 2;
      if (nw != exp_beats) begin failures++; $display("weight beats %0d exp %0d", nw, exp_beats); end
      if (stalls != 0) failures++;
    end
  endtask

  initial begin
    for (int i = 0; i < 1024; i++) u_ddr.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(LD_INPUT, 10, 37, 0, 0);
    run(LD_WEIGHT, 100, 5, 24, 1);
    run(LD_INPUT, 0, 1980, 0, 0);
    run(LD_WEIGHT, 3, 7, 576, 0);
    run(LD_WEIGHT, 500, 13, 64, 1);
    run(LD_INPUT, 200, 8, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
