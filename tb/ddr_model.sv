// ddr_model: behavioural model of the off-chip DDR read path, for
// testbenches only (not synthesizable logic of the accelerator).
//
// A read request (ddr_req_valid/ddr_req_ready, beat address, beat count) is
// accepted when the model is idle; after LAT cycles the beats are returned in
// order on ddr_rvalid, each held until ddr_rready. With GAPS set, rvalid is
// randomly withheld on some cycles to model a busy memory port. The contents
// are the array `mem`, filled by the testbench hierarchically. rst_n low
// drops any transfer in progress.
module ddr_model #(
  parameter int BEAT_W = 128,
  parameter int DEPTH  = 65536,
  parameter int LAT    = 8,
  parameter bit GAPS   = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ddr_req_valid,
  output logic              ddr_req_ready,
  input  logic [31:0]       ddr_req_addr,
  input  logic [31:0]       ddr_req_beats,
  output logic              ddr_rvalid,
  input  logic              ddr_rready,
  output logic [BEAT_W-1:0] ddr_rdata
);
  logic [BEAT_W-1:0] mem [DEPTH];
  logic        active = 1'b0;
  logic [31:0] addr = '0, left = '0;
  int          wait_c = 0;
  logic        gap = 1'b0;
  int unsigned requests = 0;

  assign ddr_req_ready = !active;
  assign ddr_rvalid    = active && wait_c == 0 && left != 0 && !gap;
  assign ddr_rdata     = mem[addr % DEPTH];

  always @(posedge clk) begin
    gap <= GAPS && ($urandom_range(0, 3) == 0);
    if (!rst_n) begin
      active <= 1'b0; left <= '0; wait_c <= 0;
    end else if (!active) begin
      if (ddr_req_valid) begin
        active <= 1'b1; addr <= ddr_req_addr; left <= ddr_req_beats; wait_c <= LAT;
        requests <= requests + 1;
      end
    end else begin
      if (wait_c != 0) wait_c <= wait_c - 1;
      if (ddr_rvalid && ddr_rready) begin
        addr <= addr + 1;
        left <= left - 1;
      end
      if (left == 0 || (left == 1 && ddr_rvalid && ddr_rready)) active <= 1'b0;
    end
  end
endmodule
