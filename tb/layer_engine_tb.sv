// layer_engine_tb: checks single layers run by the layer engine.
//
// A reduced datapath (P_C = 4 kernels, P_F = 8 FC lanes, 1024-word feature
// banks) is built around the engine from the real buffer and unit modules.
// The source bank and weight bank are preloaded with random data; the
// destination bank is filled with a sentinel. Each layer's result is
// compared, address by address over the whole destination bank, with a
// nested-loop model, so that both wrong values and stray writes are caught.
// Layers: a banded 3x3 convolution with two filter blocks (the last one
// partial), a 1x1 convolution on a 4x5 image (edge tiles partly outside the
// image), and an FC layer with two row blocks. The engine's busy time must
// equal, per pass, (cin+1) issue cycles + 3 pipeline cycles + the write-back
// cycles (nv, or 9*nv for 1x1).
module layer_engine_tb;
  import hsi_pkg::*;
  localparam int P_C = 4, P_F = 8, FD = 1024, WD = 256, LANES = 9 * P_C;
  localparam int FAW = 10, WAW = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 0, done, busy;
  layer_desc_t desc;
  logic [FAW-1:0] f_raddr [9];
  logic f_we;
  logic [FAW-1:0] f_waddr;
  data_t f_wdata;
  logic [WAW-1:0] w_raddr;
  logic cu_valid, cu_bias, cu_last, cu_1x1, cu_res_valid;
  logic fc_valid, fc_bias, fc_last, fc_res_valid;
  acc_t cu_acc [P_C][9];
  acc_t fc_acc [P_F];
  data_t rd [9];
  data_t rd_unused [9];
  logic [LANES*DATA_W-1:0] wword;
  int checks = 0, failures = 0;

  layer_engine #(.P_C(P_C), .P_F(P_F), .FDEPTH(FD), .WDEPTH(WD)) dut (.*);
  feature_buffer #(.DEPTH(FD)) u_src (.clk, .we(1'b0), .waddr('0), .wdata('0), .raddr(f_raddr), .rdata(rd));
  feature_buffer #(.DEPTH(FD)) u_dst (.clk, .we(f_we), .waddr(f_waddr), .wdata(f_wdata),
                                      .raddr(f_raddr), .rdata(rd_unused));
  weight_buffer #(.LANES(LANES), .WDEPTH(WD), .BEAT(4)) u_w (
    .clk, .we(1'b0), .wbank(1'b0), .waddr('0), .wlane('0), .wdata('0),
    .rbank(1'b0), .raddr(w_raddr), .rdata(wword));
  conv_unit #(.P_C(P_C)) u_cu (.clk, .rst_n, .in_valid(cu_valid), .in_bias(cu_bias),
    .in_last(cu_last), .mode_1x1(cu_1x1), .x(rd), .wword, .acc(cu_acc), .res_valid(cu_res_valid));
  fc_unit #(.P_F(P_F), .LANES(LANES)) u_fc (.clk, .rst_n, .in_valid(fc_valid), .in_bias(fc_bias),
    .in_last(fc_last), .x(rd[0]), .wword, .acc(fc_acc), .res_valid(fc_res_valid));
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int busy_cycles;
  always @(posedge clk) if (busy) busy_cycles <= busy_cycles + 1;

  int src [FD];
  int expm [FD];
  int wv [64][64][9];
  int bv [64];

  function automatic int rq(longint a, bit relu);
    longint s;
    s = a >>> 8;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    if (relu && s < 0) s = 0;
    return int'(s);
  endfunction

  task automatic run_layer(layer_desc_t d);
    int taps, par, nblk, ho, wo, passes, exp_cycles;
    taps = (d.kind == L_CONV3) ? 9 : 1;
    par  = (d.kind == L_FC) ? P_F : P_C;
    nblk = (int'(d.cout) + par - 1) / par;
    ho = (d.kind == L_CONV3) ? int'(d.in_h) - 2 : int'(d.in_h);
    wo = (d.kind == L_CONV3) ? int'(d.in_w) - 2 : int'(d.in_w);
    if (d.kind == L_FC) begin ho = 1; wo = 1; end
    // data
    for (int a = 0; a < FD; a++) begin
      src[a] = $urandom_range(0, 511) - 256;
      u_src.mem[a] = data_t'(src[a]);
      u_dst.mem[a] = 16'sh5a5a;
      expm[a] = 16'sh5a5a;
    end
    for (int m = 0; m < int'(d.cout); m++) begin
      bv[m] = $urandom_range(0, 255) - 128;
      for (int ci = 0; ci < int'(d.cin); ci++)
        for (int t = 0; t < 9; t++) wv[m][ci][t] = $urandom_range(0, 255) - 128;
    end
    for (int b = 0; b < nblk; b++)
      for (int s = 0; s <= int'(d.cin); s++) begin
        logic [LANES*DATA_W-1:0] word;
        word = '0;
        for (int k = 0; k < par; k++) begin
          int m = b * par + k;
          if (m >= int'(d.cout)) continue;
          if (s == 0) word[((d.kind == L_CONV3) ? 9 * k : k) * 16 +: 16] = 16'(bv[m]);
          else for (int t = 0; t < taps; t++)
            word[((d.kind == L_CONV3) ? 9 * k + t : k) * 16 +: 16] = 16'(wv[m][s - 1][t]);
        end
        u_w.bank0[b * (int'(d.cin) + 1) + s] = word;
      end
    // model
    for (int g = 0; g < int'(d.groups); g++)
      for (int r = 0; r < ho; r++)
        for (int c = 0; c < wo; c++)
          for (int m = 0; m < int'(d.cout); m++) begin
            longint acc = longint'(bv[m]) * 256;
            for (int ci = 0; ci < int'(d.cin); ci++)
              for (int t = 0; t < taps; t++)
                acc += longint'(src[(g * int'(d.in_gs) + (r + t / 3) * int'(d.in_rs)
                                    + (c + t % 3) * int'(d.in_cs) + ci * int'(d.in_ks)) % FD])
                       * longint'(wv[m][ci][t]);
            expm[(g * int'(d.out_gs) + r * int'(d.out_rs) + c * int'(d.out_cs)
                  + m * int'(d.out_ks)) % FD] = rq(acc, d.relu);
          end
    // expected busy cycles
    exp_cycles = 0;
    for (int b = 0; b < nblk; b++) begin
      int nv = (int'(d.cout) - b * par < par) ? int'(d.cout) - b * par : par;
      if (d.kind == L_CONV1) passes = int'(d.groups) * ((ho + 2) / 3) * ((wo + 2) / 3);
      else passes = int'(d.groups) * ho * wo;
      exp_cycles += passes * (int'(d.cin) + 1 + 3 + ((d.kind == L_CONV1) ? 9 * nv : nv));
    end
    // run
    desc = d;
    @(negedge clk); busy_cycles = 0; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int a = 0; a < FD; a++) begin
      checks++;
      if (int'(u_dst.mem[a]) != expm[a]) begin
        failures++;
        if (failures < 10) $display("kind %0d addr %0d: %0d exp %0d", d.kind, a, u_dst.mem[a], expm[a]);
      end
    end
    checks++;
    if (busy_cycles != exp_cycles) begin failures++; $display("cycles %0d exp %0d", busy_cycles, exp_cycles); end
  endtask

  initial begin
    layer_desc_t d;
    desc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // banded 3x3 conv: 2 bands of 5x6x3 -> 3x4x6, bands 100 apart
    d = '0; d.kind = L_CONV3; d.relu = 1; d.in_h = 5; d.in_w = 6; d.cin = 3; d.cout = 6;
    d.groups = 2; d.in_gs = 100; d.out_gs = 80; d.in_rs = 18; d.in_cs = 3; d.in_ks = 1;
    d.out_rs = 24; d.out_cs = 6; d.out_ks = 1;
    run_layer(d);
    // 1x1 conv on 4x5x7 -> 4x5x5, channel-major output layout
    d = '0; d.kind = L_CONV1; d.relu = 0; d.in_h = 4; d.in_w = 5; d.cin = 7; d.cout = 5;
    d.groups = 1; d.in_rs = 35; d.in_cs = 7; d.in_ks = 1; d.out_rs = 5; d.out_cs = 1; d.out_ks = 20;
    run_layer(d);
    // FC 10 -> 11 (two row blocks of 8)
    d = '0; d.kind = L_FC; d.relu = 1; d.in_h = 1; d.in_w = 1; d.cin = 10; d.cout = 11;
    d.groups = 1; d.in_ks = 1; d.out_ks = 1;
    run_layer(d);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
