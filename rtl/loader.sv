// loader: DMA from off-chip DDR into the on-chip buffers.
//
// Serves one request at a time (req_valid/req_ready). An input request
// copies `count` features, packed BEAT per DDR beat, into feature bank 0 from
// address 0, one feature per cycle (the beat is held and ddr_rready lowered
// while it is unpacked). A weight request copies `count` weight words of
// `lanes` values each into weight bank `bank`; every beat is written straight
// into the word at the next lane offset, so a weight beat is absorbed every
// cycle. `lanes` must be a multiple of BEAT.
// DDR side: one read burst per request, ddr_req_* handshake (beat address,
// beat count), then ddr_rvalid/ddr_rready beats in order. done pulses for one
// cycle after the last value has been written. w_data is ddr_rdata itself,
// with no register. The top 3 bits of ddr_req_beats are always 0: a 16-bit
// word count times at most 2^13 beats per word fits in 29 bits.
// That inputs and weights come from DDR follows the paper; the port protocol
// and widths are this design's choices.
module loader
  import hsi_pkg::*;
#(
  parameter int BEAT_W = 128,
  parameter int LANES  = 576,
  parameter int WDEPTH = 1024,
  parameter int FDEPTH = 8192,
  localparam int BEAT  = BEAT_W / DATA_W,
  localparam int WAW   = $clog2(WDEPTH),
  localparam int LW    = $clog2(LANES),
  localparam int FAW   = $clog2(FDEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // request from the control unit
  input  logic              req_valid,
  output logic              req_ready,
  input  ld_req_t           req,
  output logic              done,
  // DDR read port
  output logic              ddr_req_valid,
  input  logic              ddr_req_ready,
  output logic [DDR_AW-1:0] ddr_req_addr,
  output logic [31:0]       ddr_req_beats,
  input  logic              ddr_rvalid,
  output logic              ddr_rready,
  input  logic [BEAT_W-1:0] ddr_rdata,
  // weight buffer write port
  output logic              w_we,
  output logic              w_bank,
  output logic [WAW-1:0]    w_addr,
  output logic [LW-1:0]     w_lane,
  output logic [BEAT_W-1:0] w_data,
  // feature bank 0 write port
  output logic              f_we,
  output logic [FAW-1:0]    f_addr,
  output data_t             f_data
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_DATA} state_e;
  state_e      state;
  ld_req_t     r;
  logic [31:0] beats_left;
  logic [15:0] lane, word;
  logic [15:0] vcount;               // features written (input)
  logic [BEAT_W-1:0] hold;           // beat being unpacked (input)
  logic        have;
  logic [$clog2(BEAT+1)-1:0] idx;

  assign req_ready     = (state == S_IDLE);
  assign ddr_req_valid = (state == S_REQ);
  assign ddr_req_addr  = r.ddr;
  assign ddr_req_beats = (r.kind == LD_WEIGHT) ? 32'(r.count) * 32'(r.lanes / 16'(BEAT))
                                               : (32'(r.count) + 32'(BEAT - 1)) / 32'(BEAT);
  assign ddr_rready    = (state == S_DATA) && (r.kind == LD_WEIGHT || !have);

  // weight writes go straight from the DDR beat
  assign w_we   = (state == S_DATA) && (r.kind == LD_WEIGHT) && ddr_rvalid;
  assign w_bank = r.bank;
  assign w_addr = word[WAW-1:0];
  assign w_lane = lane[LW-1:0];
  assign w_data = ddr_rdata;
  // input writes come from the held beat
  assign f_we   = (state == S_DATA) && (r.kind == LD_INPUT) && have;
  assign f_addr = vcount[FAW-1:0];
  assign f_data = data_t'(hold[idx*DATA_W +: DATA_W]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; r <= '0; beats_left <= '0; lane <= '0; word <= '0;
      vcount <= '0; hold <= '0; have <= 1'b0; idx <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          r <= req; lane <= '0; word <= '0; vcount <= '0; have <= 1'b0; idx <= '0;
          state <= S_REQ;
        end
        S_REQ: if (ddr_req_ready) begin
          beats_left <= ddr_req_beats;
          state <= S_DATA;
          if (ddr_req_beats == 0) begin state <= S_IDLE; done <= 1'b1; end
        end
        S_DATA: begin
          if (r.kind == LD_WEIGHT) begin
            if (ddr_rvalid) begin
              beats_left <= beats_left - 1;
              if (lane + 16'(BEAT) >= r.lanes) begin lane <= '0; word <= word + 1; end
              else lane <= lane + 16'(BEAT);
              if (beats_left == 1) begin state <= S_IDLE; done <= 1'b1; end
            end
          end else begin
            if (!have) begin
              if (ddr_rvalid) begin hold <= ddr_rdata; have <= 1'b1; idx <= '0; end
            end else begin
              vcount <= vcount + 1;
              idx    <= idx + 1;
              if (vcount + 1 == r.count) begin
                have <= 1'b0; state <= S_IDLE; done <= 1'b1;
              end else if (32'(idx) == BEAT - 1) have <= 1'b0;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
