// control_unit: layer parameters, load scheduling and layer sequencing.
//
// The host writes global registers and one descriptor per layer through a
// simple register port (cfg_we/cfg_addr/cfg_wdata, one 32-bit write per
// cycle): R_NLAYERS, R_IN_DDR (DDR beat address of the input patch),
// R_IN_LEN (features), R_NCLASS, and at R_LAYER0 + 16*L + field the fields
// of layer L (field 0: bits 1:0 kind, bit 4 relu). Writing 1 to bit 0 of
// R_CTRL starts one classification.
//
// A run follows the pre-fetch schedule: the loader first fetches the input
// patch into feature bank 0, then the weights of layers 0 and 1 into weight
// banks 0 and 1. Layer L starts as soon as layer L-1 has finished and its own
// weights are in bank L%2; the weights of layer L+1 are fetched into the
// other bank while L computes (they may start once layer L-1, the previous
// user of that bank, is done). Layer L reads feature bank L%2 and writes bank
// (L+1)%2. After the last layer the class selector reads the scores.
// stall_cycles counts cycles in which the next layer waits for its weights,
// overlap_cycles those in which a weight transfer runs during computation.
// The schedule follows the paper's pre-fetch description; the register map
// and the counters are this design's.
module control_unit
  import hsi_pkg::*;
#(
  parameter int MAX_LAYERS = 8,
  parameter int P_C        = 64,
  parameter int P_F        = 256,
  localparam int LCW = $clog2(MAX_LAYERS + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  // register port from the processor
  input  logic           cfg_we,
  input  logic [7:0]     cfg_addr,
  input  logic [31:0]    cfg_wdata,
  // loader
  output logic           ld_valid,
  input  logic           ld_ready,
  output ld_req_t        ld_req,
  input  logic           ld_done,
  // layer engine
  output logic           eng_start,
  output layer_desc_t    eng_desc,
  input  logic           eng_done,
  output logic           layer_par,     // parity of the computing layer
  // class selector
  output logic           cls_start,
  output logic [4:0]     cls_n,
  output logic           cls_bank,
  input  logic           cls_done,
  // status
  output logic           busy,
  output logic           done,
  output logic [31:0]    stall_cycles,
  output logic [31:0]    overlap_cycles
);
  layer_desc_t desc_q [MAX_LAYERS];
  logic [LCW-1:0] nl;
  logic [31:0]    in_ddr;
  logic [15:0]    in_len;
  logic [4:0]     ncls;

  logic           running, in_issued, in_done, ld_busy, ld_is_w, computing, cls_started;
  logic [LCW-1:0] wl_issued, wl_done, lc;

  // ---- register port ----
  logic [3:0] fld;
  logic [3:0] lay;
  assign fld = cfg_addr[3:0];
  assign lay = cfg_addr[7:4] - 4'd2;
  logic [$clog2(MAX_LAYERS)-1:0] li;
  assign li  = lay[$clog2(MAX_LAYERS)-1:0];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MAX_LAYERS; i++) desc_q[i] <= '0;
      nl <= '0; in_ddr <= '0; in_len <= '0; ncls <= '0;
    end else if (cfg_we && !running) begin
      if (cfg_addr >= R_LAYER0) begin
        if (int'(lay) < MAX_LAYERS) begin
          unique case (fld)
            F_KIND:    begin desc_q[li].kind <= layer_kind_e'(cfg_wdata[1:0]);
                             desc_q[li].relu <= cfg_wdata[4]; end
            F_IN_H:    desc_q[li].in_h    <= cfg_wdata[15:0];
            F_IN_W:    desc_q[li].in_w    <= cfg_wdata[15:0];
            F_CIN:     desc_q[li].cin     <= cfg_wdata[15:0];
            F_COUT:    desc_q[li].cout    <= cfg_wdata[15:0];
            F_GROUPS:  desc_q[li].groups  <= cfg_wdata[15:0];
            F_IN_GS:   desc_q[li].in_gs   <= cfg_wdata[15:0];
            F_OUT_GS:  desc_q[li].out_gs  <= cfg_wdata[15:0];
            F_IN_RS:   desc_q[li].in_rs   <= cfg_wdata[15:0];
            F_IN_CS:   desc_q[li].in_cs   <= cfg_wdata[15:0];
            F_IN_KS:   desc_q[li].in_ks   <= cfg_wdata[15:0];
            F_OUT_RS:  desc_q[li].out_rs  <= cfg_wdata[15:0];
            F_OUT_CS:  desc_q[li].out_cs  <= cfg_wdata[15:0];
            F_OUT_KS:  desc_q[li].out_ks  <= cfg_wdata[15:0];
            F_W_DDR:   desc_q[li].w_ddr   <= cfg_wdata;
            F_W_LANES: desc_q[li].w_lanes <= cfg_wdata[15:0];
            default: ;
          endcase
        end
      end else begin
        unique case (cfg_addr)
          R_NLAYERS: nl     <= LCW'(cfg_wdata);
          R_IN_DDR:  in_ddr <= cfg_wdata;
          R_IN_LEN:  in_len <= cfg_wdata[15:0];
          R_NCLASS:  ncls   <= cfg_wdata[4:0];
          default: ;
        endcase
      end
    end
  end

  // ---- load scheduling ----
  logic        want_in, want_w;
  layer_desc_t wd;
  logic [15:0] wpar, wwords;
  assign wd      = desc_q[wl_issued[$clog2(MAX_LAYERS)-1:0]];
  assign wpar    = (wd.kind == L_FC) ? 16'(P_F) : 16'(P_C);
  assign want_in = running && !in_issued;
  assign want_w  = running && in_issued && (wl_issued < nl) && (wl_issued <= lc + LCW'(1));
  always_comb begin
    // weight words of a layer: (biases + cin channels) per filter block
    wwords = (wd.cout + wpar - 16'd1) / wpar * (wd.cin + 16'd1);
    ld_req = '0;
    if (!in_issued) begin
      ld_req.kind  = LD_INPUT;
      ld_req.ddr   = in_ddr;
      ld_req.count = in_len;
    end else begin
      ld_req.kind  = LD_WEIGHT;
      ld_req.bank  = wl_issued[0];
      ld_req.ddr   = wd.w_ddr;
      ld_req.count = wwords;
      ld_req.lanes = wd.w_lanes;
    end
  end
  assign ld_valid = (want_in || want_w) && !ld_busy && ld_ready;

  // ---- layer sequencing ----
  logic can_start;
  assign can_start = running && !computing && (lc < nl) && in_done && (wl_done > lc);
  assign eng_start = can_start;
  assign eng_desc  = desc_q[lc[$clog2(MAX_LAYERS)-1:0]];
  assign layer_par = lc[0];
  assign cls_start = running && !cls_started && (lc == nl) && !computing;
  assign cls_n     = ncls;
  assign cls_bank  = nl[0];
  assign busy      = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; in_issued <= 1'b0; in_done <= 1'b0; ld_busy <= 1'b0; ld_is_w <= 1'b0;
      computing <= 1'b0; cls_started <= 1'b0; wl_issued <= '0; wl_done <= '0; lc <= '0;
      done <= 1'b0; stall_cycles <= '0; overlap_cycles <= '0;
    end else begin
      done <= 1'b0;
      if (!running) begin
        if (cfg_we && cfg_addr == R_CTRL && cfg_wdata[0]) begin
          running <= 1'b1; in_issued <= 1'b0; in_done <= 1'b0; ld_busy <= 1'b0;
          computing <= 1'b0; cls_started <= 1'b0; wl_issued <= '0; wl_done <= '0; lc <= '0;
          stall_cycles <= '0; overlap_cycles <= '0;
        end
      end else begin
        if (ld_valid) begin
          ld_busy <= 1'b1;
          ld_is_w <= in_issued;
          if (!in_issued) in_issued <= 1'b1;
          else            wl_issued <= wl_issued + LCW'(1);
        end
        if (ld_done) begin
          ld_busy <= 1'b0;
          if (ld_is_w) wl_done <= wl_done + LCW'(1);
          else         in_done <= 1'b1;
        end
        if (can_start) computing <= 1'b1;
        if (eng_done) begin computing <= 1'b0; lc <= lc + LCW'(1); end
        if (cls_start) cls_started <= 1'b1;
        if (cls_done) begin running <= 1'b0; done <= 1'b1; end
        if (running && !computing && lc < nl && in_done && wl_done <= lc)
          stall_cycles <= stall_cycles + 32'd1;
        if (computing && ld_busy && ld_is_w)
          overlap_cycles <= overlap_cycles + 32'd1;
      end
    end
  end
endmodule
