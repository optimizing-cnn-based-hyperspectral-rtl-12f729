// feature_buffer: one bank of the on-chip feature buffers.
//
// Holds DEPTH 16-bit features. NRD synchronous read ports (data one cycle
// after the address, like block RAM) let the layer engine fetch a whole 3x3
// window per cycle; one write port stores results or the loaded input.
// The accelerator uses two banks in ping-pong: one holds a layer's input
// while the other receives its output, and the roles swap per layer.
// The paper asks for on-chip buffers that hold one layer's input and output;
// depth and port count are this design's choices.
module feature_buffer
  import hsi_pkg::*;
#(
  parameter int DEPTH = 8192,
  parameter int NRD   = 9,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  data_t         wdata,
  input  logic [AW-1:0] raddr [NRD],
  output data_t         rdata [NRD]
);
  data_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    for (int p = 0; p < NRD; p++) rdata[p] <= mem[raddr[p]];
  end
endmodule
