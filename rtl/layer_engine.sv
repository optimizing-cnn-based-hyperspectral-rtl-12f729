// layer_engine: runs one layer of the network on the CONV or FC unit.
//
// Given a layer descriptor it walks, in this order, the bands (groups), the
// blocks of P_C filters (P_F rows for FC), the output positions and, inside
// one pass, the input channels. A pass is a bias token followed by one token
// per input channel; each token reads one weight word and, from the source
// feature bank, the nine features of a 3x3 window (3x3 conv), of a 3x3 block
// of pixels (1x1 conv, which therefore makes nine outputs per kernel), or one
// element (FC, port 0). When the unit reports the pass result the engine
// writes it back to the destination bank, one requantised value per cycle,
// then starts the next pass.
//
// Feature addresses are  g*gs + row*rs + col*cs + ch*ks  with the
// descriptor's strides, which is how the band split of Block 1 and the
// concatenation before Block 3 are made without copying. Weight word of
// channel ci in filter block b: b*(cin+1) + 1 + ci (word b*(cin+1) holds the
// biases).
// Timing: one token per cycle; memory data and unit inputs follow the token
// by one cycle; the unit result follows the last token by two more cycles;
// then nv (3x3, FC) or 9*nv (1x1) write-back cycles, nv = filters in the
// block. done pulses for one cycle at the end of the layer.
// The layer types, shapes and shared band weights follow the paper; the loop
// order, the address scheme and the non-overlapped write-back are this
// design's choices.
module layer_engine
  import hsi_pkg::*;
#(
  parameter int P_C    = 64,
  parameter int P_F    = 256,
  parameter int FDEPTH = 8192,
  parameter int WDEPTH = 1024,
  localparam int FAW   = $clog2(FDEPTH),
  localparam int WAW   = $clog2(WDEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  layer_desc_t    desc,
  output logic           done,
  output logic           busy,
  // source feature bank (read) and destination bank (write)
  output logic [FAW-1:0] f_raddr [9],
  output logic           f_we,
  output logic [FAW-1:0] f_waddr,
  output data_t          f_wdata,
  // weight bank read
  output logic [WAW-1:0] w_raddr,
  // CONV unit
  output logic           cu_valid, cu_bias, cu_last, cu_1x1,
  input  acc_t           cu_acc [P_C][9],
  input  logic           cu_res_valid,
  // FC unit
  output logic           fc_valid, fc_bias, fc_last,
  input  acc_t           fc_acc [P_F],
  input  logic           fc_res_valid
);
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT, S_WB} state_e;
  state_e state;

  logic [15:0] g, blk, r, c, s;        // band, filter block, out row/col, step
  logic [15:0] wk;                     // write-back kernel / lane
  logic [1:0]  wdy, wdx;               // write-back pixel inside a 1x1 tile

  logic        is_fc, is_1x1;
  logic [15:0] hout, wout, pstep, par, nblk, nv;
  always_comb begin
    is_fc  = (desc.kind == L_FC);
    is_1x1 = (desc.kind == L_CONV1);
    hout   = is_fc ? 16'd1 : (is_1x1 ? desc.in_h : desc.in_h - 16'd2);
    wout   = is_fc ? 16'd1 : (is_1x1 ? desc.in_w : desc.in_w - 16'd2);
    pstep  = is_1x1 ? 16'd3 : 16'd1;
    par    = is_fc ? 16'(P_F) : 16'(P_C);
    nblk   = (desc.cout + par - 16'd1) / par;
    nv     = (desc.cout - blk * par < par) ? desc.cout - blk * par : par;
  end

  // ---- issue: addresses of the current token ----
  logic [31:0] fbase;
  logic [15:0] ci;
  assign ci    = s - 16'd1;
  assign fbase = 32'(g) * 32'(desc.in_gs) + 32'(ci) * 32'(desc.in_ks);
  always_comb begin
    for (int dy = 0; dy < 3; dy++)
      for (int dx = 0; dx < 3; dx++)
        f_raddr[dy*3+dx] = FAW'(fbase + 32'(r + 16'(dy)) * 32'(desc.in_rs)
                                      + 32'(c + 16'(dx)) * 32'(desc.in_cs));
  end
  assign w_raddr = WAW'(32'(blk) * (32'(desc.cin) + 32'd1) + 32'(s));

  // token, aligned with the memory read data one cycle later
  logic tok_valid, tok_bias, tok_last;
  assign tok_valid = (state == S_ISSUE);
  assign tok_bias  = (s == 16'd0);
  assign tok_last  = (s == desc.cin);
  logic d_valid, d_bias, d_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin d_valid <= 1'b0; d_bias <= 1'b0; d_last <= 1'b0; end
    else begin d_valid <= tok_valid; d_bias <= tok_bias; d_last <= tok_last; end
  end
  assign cu_valid = d_valid && !is_fc;
  assign fc_valid = d_valid &&  is_fc;
  assign cu_bias  = d_bias;
  assign fc_bias  = d_bias;
  assign cu_last  = d_last;
  assign fc_last  = d_last;
  assign cu_1x1   = is_1x1;

  // ---- write-back ----
  acc_t        wb_acc;
  logic [15:0] orow, ocol, m;
  logic        wb_ok;
  always_comb begin
    if (is_fc)       wb_acc = fc_acc[wk[$clog2(P_F)-1:0]];
    else if (is_1x1) wb_acc = cu_acc[wk[$clog2(P_C)-1:0]][int'(wdy)*3 + int'(wdx)];
    else             wb_acc = cu_acc[wk[$clog2(P_C)-1:0]][0];
    orow  = r + 16'(wdy);
    ocol  = c + 16'(wdx);
    m     = blk * par + wk;
    wb_ok = (orow < hout) && (ocol < wout);
  end
  requant u_requant (.acc(wb_acc), .relu(desc.relu), .q(f_wdata));
  assign f_we    = (state == S_WB) && wb_ok;
  assign f_waddr = FAW'(32'(g) * 32'(desc.out_gs) + 32'(orow) * 32'(desc.out_rs)
                      + 32'(ocol) * 32'(desc.out_cs) + 32'(m) * 32'(desc.out_ks));

  logic wb_last;
  assign wb_last = (wk == nv - 16'd1) && (!is_1x1 || (wdy == 2'd2 && wdx == 2'd2));
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0;
      g <= '0; blk <= '0; r <= '0; c <= '0; s <= '0; wk <= '0; wdy <= '0; wdx <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          g <= '0; blk <= '0; r <= '0; c <= '0; s <= '0;
          state <= S_ISSUE;
        end
        S_ISSUE: begin
          s <= s + 16'd1;
          if (s == desc.cin) state <= S_WAIT;
        end
        S_WAIT: if ((is_fc && fc_res_valid) || (!is_fc && cu_res_valid)) begin
          wk <= '0; wdy <= '0; wdx <= '0;
          state <= S_WB;
        end
        S_WB: begin
          if (is_1x1 && !(wdy == 2'd2 && wdx == 2'd2)) begin
            if (wdx == 2'd2) begin wdx <= '0; wdy <= wdy + 2'd1; end
            else wdx <= wdx + 2'd1;
          end else begin
            wdy <= '0; wdx <= '0; wk <= wk + 16'd1;
          end
          if (wb_last) begin
            s <= '0; wk <= '0;
            state <= S_ISSUE;
            if (c + pstep < wout) c <= c + pstep;
            else begin
              c <= '0;
              if (r + pstep < hout) r <= r + pstep;
              else begin
                r <= '0;
                if (blk + 16'd1 < nblk) blk <= blk + 16'd1;
                else begin
                  blk <= '0;
                  if (g + 16'd1 < desc.groups) g <= g + 16'd1;
                  else begin g <= '0; state <= S_IDLE; done <= 1'b1; end
                end
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
