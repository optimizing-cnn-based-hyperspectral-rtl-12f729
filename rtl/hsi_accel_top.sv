// hsi_accel_top: CNN accelerator for per-pixel hyperspectral classification.
//
// One run classifies one pixel: the input patch (p x p x Nc features) and
// the weights are read from off-chip DDR, every layer of the network is
// computed from on-chip buffers, and the label of the highest-scoring class
// is returned. Parts:
//   control_unit   layer registers written by the host, load schedule with
//                  one-layer-ahead weight pre-fetch, layer sequencing
//   loader         DDR -> feature bank 0 (input) / weight banks (weights)
//   feature_buffer x2, ping-pong: layer L reads bank L%2, writes (L+1)%2
//   weight_buffer  two banks, layer L reads bank L%2
//   layer_engine   address generation and write-back for one layer
//   conv_unit      P_C kernels of 9 multipliers + adder tree (1x1 bypass)
//   fc_unit        P_F multiply-accumulate lanes
//   class_select   arg-max over the final scores
// Interface: the host register port (see control_unit), a DDR read port
// (see loader), and status: done pulses when `label`, `best` and `scores`
// are valid; they hold until the next run. stall_cycles and overlap_cycles
// report how well weight transfers were hidden behind computation.
// The block structure follows the paper's architecture figure; the DDR and
// register protocols are this design's.
module hsi_accel_top
  import hsi_pkg::*;
#(
  parameter int P_C         = 64,
  parameter int P_F         = 256,
  parameter int FDEPTH      = 8192,
  parameter int WDEPTH      = 1024,
  parameter int BEAT_W      = 128,
  parameter int MAX_LAYERS  = 8,
  parameter int MAX_CLASSES = 16,
  localparam int LANES      = 9 * P_C,
  localparam int FAW        = $clog2(FDEPTH),
  localparam int WAW        = $clog2(WDEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // host register port
  input  logic              cfg_we,
  input  logic [7:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  // DDR read port
  output logic              ddr_req_valid,
  input  logic              ddr_req_ready,
  output logic [DDR_AW-1:0] ddr_req_addr,
  output logic [31:0]       ddr_req_beats,
  input  logic              ddr_rvalid,
  output logic              ddr_rready,
  input  logic [BEAT_W-1:0] ddr_rdata,
  // status and result
  output logic              busy,
  output logic              done,
  output logic [4:0]        label,
  output data_t             best,
  output data_t             scores [MAX_CLASSES],
  output logic [31:0]       stall_cycles,
  output logic [31:0]       overlap_cycles
);
  // control <-> loader / engine / classifier
  logic        ld_valid, ld_ready, ld_done;
  ld_req_t     ld_req;
  logic        eng_start, eng_done, eng_busy, layer_par;
  layer_desc_t eng_desc;
  logic        cls_start, cls_done, cls_bank;
  logic [4:0]  cls_n;

  control_unit #(.MAX_LAYERS(MAX_LAYERS), .P_C(P_C), .P_F(P_F)) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .ld_valid, .ld_ready, .ld_req, .ld_done,
    .eng_start, .eng_desc, .eng_done, .layer_par,
    .cls_start, .cls_n, .cls_bank, .cls_done,
    .busy, .done, .stall_cycles, .overlap_cycles
  );

  // loader
  logic              lw_we, lw_bank, lf_we;
  logic [WAW-1:0]    lw_addr;
  logic [$clog2(LANES)-1:0] lw_lane;
  logic [BEAT_W-1:0] lw_data;
  logic [FAW-1:0]    lf_addr;
  data_t             lf_data;

  loader #(.BEAT_W(BEAT_W), .LANES(LANES), .WDEPTH(WDEPTH), .FDEPTH(FDEPTH)) u_loader (
    .clk, .rst_n, .req_valid(ld_valid), .req_ready(ld_ready), .req(ld_req), .done(ld_done),
    .ddr_req_valid, .ddr_req_ready, .ddr_req_addr, .ddr_req_beats,
    .ddr_rvalid, .ddr_rready, .ddr_rdata,
    .w_we(lw_we), .w_bank(lw_bank), .w_addr(lw_addr), .w_lane(lw_lane), .w_data(lw_data),
    .f_we(lf_we), .f_addr(lf_addr), .f_data(lf_data)
  );

  // layer engine
  logic [FAW-1:0] e_raddr [9];
  logic           e_we;
  logic [FAW-1:0] e_waddr;
  data_t          e_wdata;
  logic [WAW-1:0] e_wraddr;
  logic           cu_valid, cu_bias, cu_last, cu_1x1, cu_res_valid;
  logic           fc_valid, fc_bias, fc_last, fc_res_valid;
  acc_t           cu_acc [P_C][9];
  acc_t           fc_acc [P_F];

  layer_engine #(.P_C(P_C), .P_F(P_F), .FDEPTH(FDEPTH), .WDEPTH(WDEPTH)) u_engine (
    .clk, .rst_n, .start(eng_start), .desc(eng_desc), .done(eng_done), .busy(eng_busy),
    .f_raddr(e_raddr), .f_we(e_we), .f_waddr(e_waddr), .f_wdata(e_wdata),
    .w_raddr(e_wraddr),
    .cu_valid, .cu_bias, .cu_last, .cu_1x1, .cu_acc, .cu_res_valid,
    .fc_valid, .fc_bias, .fc_last, .fc_acc, .fc_res_valid
  );

  // feature buffers (ping-pong)
  logic [FAW-1:0] f_raddr [9];
  data_t          rd0 [9];
  data_t          rd1 [9];
  data_t          x [9];
  logic [FAW-1:0] cls_raddr;
  logic           we0, we1;
  logic [FAW-1:0] waddr0;
  data_t          wdata0;

  always_comb begin
    f_raddr = e_raddr;
    if (!eng_busy) f_raddr[0] = cls_raddr;
  end
  // the input load uses bank 0 before any layer writes; layers write the
  // bank opposite to the one they read
  assign we0    = lf_we || (e_we && layer_par);
  assign waddr0 = lf_we ? lf_addr : e_waddr;
  assign wdata0 = lf_we ? lf_data : e_wdata;
  assign we1    = e_we && !layer_par;

  feature_buffer #(.DEPTH(FDEPTH), .NRD(9)) u_fbuf0 (
    .clk, .we(we0), .waddr(waddr0), .wdata(wdata0), .raddr(f_raddr), .rdata(rd0));
  feature_buffer #(.DEPTH(FDEPTH), .NRD(9)) u_fbuf1 (
    .clk, .we(we1), .waddr(e_waddr), .wdata(e_wdata), .raddr(f_raddr), .rdata(rd1));

  assign x = layer_par ? rd1 : rd0;

  // weight buffer
  logic [LANES*DATA_W-1:0] wword;
  weight_buffer #(.LANES(LANES), .WDEPTH(WDEPTH), .BEAT(BEAT_W / DATA_W)) u_wbuf (
    .clk, .we(lw_we), .wbank(lw_bank), .waddr(lw_addr), .wlane(lw_lane), .wdata(lw_data),
    .rbank(layer_par), .raddr(e_wraddr), .rdata(wword));

  // computation units
  conv_unit #(.P_C(P_C), .LANES(LANES)) u_conv (
    .clk, .rst_n, .in_valid(cu_valid), .in_bias(cu_bias), .in_last(cu_last),
    .mode_1x1(cu_1x1), .x, .wword, .acc(cu_acc), .res_valid(cu_res_valid));

  fc_unit #(.P_F(P_F), .LANES(LANES)) u_fc (
    .clk, .rst_n, .in_valid(fc_valid), .in_bias(fc_bias), .in_last(fc_last),
    .x(x[0]), .wword, .acc(fc_acc), .res_valid(fc_res_valid));

  // classification
  class_select #(.MAX_CLASSES(MAX_CLASSES), .FAW(FAW)) u_cls (
    .clk, .rst_n, .start(cls_start), .n(cls_n), .raddr(cls_raddr),
    .rdata(cls_bank ? rd1[0] : rd0[0]), .done(cls_done), .label, .best, .scores);
endmodule
