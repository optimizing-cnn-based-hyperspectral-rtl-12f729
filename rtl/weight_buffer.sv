// weight_buffer: two weight banks for layer-ahead weight pre-fetch.
//
// Each bank holds WDEPTH weight words of LANES 16-bit values. The loader
// writes BEAT values per cycle into word waddr at lane offset wlane (a
// multiple of BEAT) of bank wbank; the layer engine reads a whole word per
// cycle from bank rbank, data one cycle after the address. While one bank
// feeds the layer being computed, the next layer's weights are written into
// the other bank. A word holds, for one input channel, the weights of one
// block of P_C filters (3x3: 9 lanes per filter) or P_F FC rows.
// The two-bank pre-fetch follows the paper; word layout and sizes are this
// design's choices.
module weight_buffer
  import hsi_pkg::*;
#(
  parameter int LANES = 576,
  parameter int WDEPTH = 1024,
  parameter int BEAT  = 8,
  localparam int AW   = $clog2(WDEPTH),
  localparam int LW   = $clog2(LANES)
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic                    wbank,
  input  logic [AW-1:0]           waddr,
  input  logic [LW-1:0]           wlane,
  input  logic [BEAT*DATA_W-1:0]  wdata,
  input  logic                    rbank,
  input  logic [AW-1:0]           raddr,
  output logic [LANES*DATA_W-1:0] rdata
);
  logic [LANES*DATA_W-1:0] bank0 [WDEPTH];
  logic [LANES*DATA_W-1:0] bank1 [WDEPTH];

  always_ff @(posedge clk) begin
    if (we && !wbank) bank0[waddr][wlane*DATA_W +: BEAT*DATA_W] <= wdata;
    if (we &&  wbank) bank1[waddr][wlane*DATA_W +: BEAT*DATA_W] <= wdata;
    rdata <= rbank ? bank1[raddr] : bank0[raddr];
  end
endmodule
