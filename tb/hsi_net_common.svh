// hsi_net_common.svh: shared body of the end-to-end testbenches.
//
// Included inside a testbench module. It instantiates hsi_accel_top with its
// default parameters and a behavioural DDR, and provides run_net(), which
//  1. builds the network of the design for a dataset shape: Block 1 (3x3
//     convolution for a 5x5 patch, 1x1 for a 3x3 patch, Nc -> Nc channels),
//     Block 2 (four 3x3 convolutions 1->2->4->4->4 channels applied with
//     shared weights to each of Nb bands of the flattened 9 x Nc/Nb image),
//     Block 3 (FC to `hidden`, FC to the classes);
//  2. draws random weights, biases and an input patch, packs them into the
//     DDR image in the weight-word layout, and programs the descriptors;
//  3. computes every layer with a plain nested-loop model of the arithmetic
//     (Q8.8 operands, exact sums, floor shift, saturation, ReLU);
//  4. runs the accelerator and compares the class scores, the label and the
//     hidden-layer output left in the other feature bank with the model.
// It also counts how often each mechanism occurred (1x1 and 3x3 block 1,
// band-split layers, multi-block layers, FC layers, ReLU clipping, weight
// pre-fetch overlapping computation, stalls waiting for weights, DDR wait
// cycles) so a testbench can require each of them.

  import hsi_pkg::*;
  localparam int P_C = 64, P_F = 256, BEAT = 8, FD = 8192;
  localparam int DDR_DEPTH = 131072;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0;
  logic [7:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0;
  logic ddr_req_valid, ddr_req_ready, ddr_rvalid, ddr_rready;
  logic [31:0] ddr_req_addr, ddr_req_beats;
  logic [127:0] ddr_rdata;
  logic busy, done;
  logic [4:0] label;
  data_t best;
  data_t scores [16];
  logic [31:0] stall_cycles, overlap_cycles;
  int checks = 0, failures = 0;

  hsi_accel_top u_dut (.*);
  ddr_model #(.BEAT_W(128), .DEPTH(DDR_DEPTH), .LAT(10), .GAPS(1'b1)) u_ddr (
    .clk, .rst_n, .ddr_req_valid, .ddr_req_ready, .ddr_req_addr, .ddr_req_beats,
    .ddr_rvalid, .ddr_rready, .ddr_rdata);
  always #2 clk = ~clk;   // 250 MHz

  // ---- mechanism counters ----
  int n_conv1, n_conv3, n_fc, n_banded, n_multiblk, n_relu_clip, n_ddr_wait;
  int n_overlap, n_stall, n_cycles;
  always @(posedge clk) begin
    if (u_dut.eng_start) begin
      if (u_dut.eng_desc.kind == L_CONV1) n_conv1++;
      if (u_dut.eng_desc.kind == L_CONV3) n_conv3++;
      if (u_dut.eng_desc.kind == L_FC)    n_fc++;
      if (u_dut.eng_desc.groups > 1)      n_banded++;
      if (u_dut.eng_desc.kind != L_FC && u_dut.eng_desc.cout > P_C) n_multiblk++;
    end
    if (u_dut.u_engine.f_we && u_dut.u_engine.desc.relu && u_dut.u_engine.wb_acc < 0) n_relu_clip++;
    if (ddr_rready && !ddr_rvalid && u_ddr.active) n_ddr_wait++;
    if (busy) n_cycles++;
  end

  // ---- reference model state ----
  typedef struct {
    layer_desc_t d;
  } lay_t;
  layer_desc_t net [8];
  int nlay;
  int rbuf [2][FD];
  int wts [8][][];     // [layer][filter][ci*9 + tap] (1x1 and FC: tap 0)
  int bias [8][];
  int beat_ptr;

  function automatic int rq(longint a, bit relu);
    longint s;
    s = a >>> 8;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    if (relu && s < 0) s = 0;
    return int'(s);
  endfunction

  function automatic int lanes_of(layer_desc_t d);
    int n;
    if (d.kind == L_FC) n = (d.cout > P_F) ? P_F : int'(d.cout);
    else begin
      n = (d.cout > P_C) ? P_C : int'(d.cout);
      if (d.kind == L_CONV3) n = 9 * n;
    end
    return (n + BEAT - 1) / BEAT * BEAT;
  endfunction

  function automatic int rnd(int r);
    return $urandom_range(0, 2 * r) - r;
  endfunction

  task automatic put_val(int beat, int field, int v);
    u_ddr.mem[beat][field*16 +: 16] = 16'(v);
  endtask

  // random weights for layer L, packed into DDR from beat_ptr
  task automatic make_weights(int L, int wr);
    layer_desc_t d;
    int taps, par, nblk, lanes, bpw;
    d = net[L];
    taps = (d.kind == L_CONV3) ? 9 : 1;
    par  = (d.kind == L_FC) ? P_F : P_C;
    nblk = (int'(d.cout) + par - 1) / par;
    lanes = lanes_of(d);
    bpw  = lanes / BEAT;
    wts[L] = new[d.cout];
    bias[L] = new[d.cout];
    for (int m = 0; m < int'(d.cout); m++) begin
      wts[L][m] = new[int'(d.cin) * taps];
      foreach (wts[L][m][i]) wts[L][m][i] = rnd(wr);
      bias[L][m] = rnd(64);
    end
    net[L].w_ddr = 32'(beat_ptr);
    net[L].w_lanes = 16'(lanes);
    for (int b = 0; b < nblk; b++)
      for (int s = 0; s <= int'(d.cin); s++) begin
        int word = b * (int'(d.cin) + 1) + s;
        for (int i = 0; i < bpw; i++) u_ddr.mem[beat_ptr + word * bpw + i] = '0;
        for (int k = 0; k < par; k++) begin
          int m = b * par + k;
          if (m >= int'(d.cout)) continue;
          for (int t = 0; t < taps; t++) begin
            int lane, v;
            lane = (d.kind == L_CONV3) ? 9 * k + t : k;
            v = (s == 0) ? ((t == 0) ? bias[L][m] : 0) : wts[L][m][(s - 1) * taps + t];
            if (s == 0 && t != 0) continue;
            put_val(beat_ptr + word * bpw + lane / BEAT, lane % BEAT, v);
          end
        end
      end
    beat_ptr += nblk * (int'(d.cin) + 1) * bpw;
  endtask

  // plain model of one layer: reads rbuf[src], writes rbuf[1-src]
  task automatic ref_layer(int L, int src);
    layer_desc_t d;
    int ho, wo, taps;
    d = net[L];
    taps = (d.kind == L_CONV3) ? 9 : 1;
    ho = (d.kind == L_CONV3) ? int'(d.in_h) - 2 : int'(d.in_h);
    wo = (d.kind == L_CONV3) ? int'(d.in_w) - 2 : int'(d.in_w);
    if (d.kind == L_FC) begin ho = 1; wo = 1; end
    for (int g = 0; g < int'(d.groups); g++)
      for (int r = 0; r < ho; r++)
        for (int c = 0; c < wo; c++)
          for (int m = 0; m < int'(d.cout); m++) begin
            longint acc;
            acc = longint'(bias[L][m]) * 256;
            for (int ci = 0; ci < int'(d.cin); ci++)
              for (int t = 0; t < taps; t++) begin
                int a;
                a = g * int'(d.in_gs) + (r + t / 3) * int'(d.in_rs) + (c + t % 3) * int'(d.in_cs)
                    + ci * int'(d.in_ks);
                acc += longint'(rbuf[src][a % FD]) * longint'(wts[L][m][ci * taps + t]);
              end
            rbuf[1 - src][(g * int'(d.out_gs) + r * int'(d.out_rs) + c * int'(d.out_cs)
                           + m * int'(d.out_ks)) % FD] = rq(acc, d.relu);
          end
  endtask

  task automatic wr(int a, int v);
    @(negedge clk); cfg_we = 1; cfg_addr = 8'(a); cfg_wdata = 32'(v);
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic layer_desc_t mk(layer_kind_e k, bit relu, int h, int w, int cin, int cout,
                                     int groups, int igs, int ogs, int irs, int ics, int iks,
                                     int ors, int ocs, int oks);
    layer_desc_t d;
    d = '0;
    d.kind = k; d.relu = relu; d.in_h = 16'(h); d.in_w = 16'(w); d.cin = 16'(cin);
    d.cout = 16'(cout); d.groups = 16'(groups); d.in_gs = 16'(igs); d.out_gs = 16'(ogs);
    d.in_rs = 16'(irs); d.in_cs = 16'(ics); d.in_ks = 16'(iks);
    d.out_rs = 16'(ors); d.out_cs = 16'(ocs); d.out_ks = 16'(oks);
    return d;
  endfunction

  // One classification of a random patch with the design's network.
  // nc: spectral bands, p: patch size (3 or 5), nb: bands of Block 2.
  task automatic run_net(string name, int nc, int p, int nb, int hidden, int ncls);
    int bw, nin, t0, exp_label, exp_best;
    bw = nc / nb;
    // Block 1
    net[0] = mk(p == 5 ? L_CONV3 : L_CONV1, 1, p, p, nc, nc, 1, 0, 0,
                p * nc, nc, 1, 3 * nc, nc, 1);
    // Block 2: band g of the flattened 9 x nc image is columns g*bw .. g*bw+bw-1
    net[1] = mk(L_CONV3, 1, 9, bw, 1, 2, nb, bw, 7 * (bw - 2) * 2, nc, 1, 1, (bw - 2) * 2, 2, 1);
    net[2] = mk(L_CONV3, 1, 7, bw - 2, 2, 4, nb, 7 * (bw - 2) * 2, 5 * (bw - 4) * 4,
                (bw - 2) * 2, 2, 1, (bw - 4) * 4, 4, 1);
    net[3] = mk(L_CONV3, 1, 5, bw - 4, 4, 4, nb, 5 * (bw - 4) * 4, 3 * (bw - 6) * 4,
                (bw - 4) * 4, 4, 1, (bw - 6) * 4, 4, 1);
    net[4] = mk(L_CONV3, 1, 3, bw - 6, 4, 4, nb, 3 * (bw - 6) * 4, (bw - 8) * 4,
                (bw - 6) * 4, 4, 1, (bw - 8) * 4, 4, 1);
    // Block 3: the concatenation of the bands is contiguous
    nin = nb * (bw - 8) * 4;
    net[5] = mk(L_FC, 1, 1, 1, nin, hidden, 1, 0, 0, 0, 0, 1, 0, 0, 1);
    net[6] = mk(L_FC, 0, 1, 1, hidden, ncls, 1, 0, 0, 0, 0, 1, 0, 0, 1);
    nlay = 7;
    $display("%s: input %0dx%0dx%0d, Nb=%0d, concat %0d, FC %0d, classes %0d",
             name, p, p, nc, nb, nin, hidden, ncls);

    // input patch at beat 0, weights after it
    for (int i = 0; i < (p * p * nc + BEAT - 1) / BEAT; i++) u_ddr.mem[i] = '0;
    for (int a = 0; a < p * p * nc; a++) begin
      rbuf[0][a] = rnd(256);
      put_val(a / BEAT, a % BEAT, rbuf[0][a]);
    end
    beat_ptr = (p * p * nc + BEAT - 1) / BEAT;
    make_weights(0, (p == 5) ? 6 : 16);
    for (int L = 1; L < 5; L++) make_weights(L, 90);
    make_weights(5, 20);
    make_weights(6, 40);
    if (beat_ptr > DDR_DEPTH) begin failures++; $display("DDR image too large"); end

    for (int L = 0; L < nlay; L++) ref_layer(L, L % 2);
    exp_label = 0; exp_best = rbuf[nlay % 2][0];
    for (int k = 1; k < ncls; k++)
      if (rbuf[nlay % 2][k] > exp_best) begin exp_best = rbuf[nlay % 2][k]; exp_label = k; end

    // program and start
    for (int L = 0; L < nlay; L++) begin
      layer_desc_t d;
      d = net[L];
      wr(32 + 16*L + 0, {27'd0, d.relu, 2'b00, 2'(d.kind)});
      wr(32 + 16*L + 1, d.in_h);   wr(32 + 16*L + 2, d.in_w);
      wr(32 + 16*L + 3, d.cin);    wr(32 + 16*L + 4, d.cout);
      wr(32 + 16*L + 5, d.groups); wr(32 + 16*L + 6, d.in_gs);
      wr(32 + 16*L + 7, d.out_gs); wr(32 + 16*L + 8, d.in_rs);
      wr(32 + 16*L + 9, d.in_cs);  wr(32 + 16*L + 10, d.in_ks);
      wr(32 + 16*L + 11, d.out_rs); wr(32 + 16*L + 12, d.out_cs);
      wr(32 + 16*L + 13, d.out_ks); wr(32 + 16*L + 14, int'(d.w_ddr));
      wr(32 + 16*L + 15, d.w_lanes);
    end
    wr(R_NLAYERS, nlay); wr(R_IN_DDR, 0); wr(R_IN_LEN, p * p * nc); wr(R_NCLASS, ncls);
    n_cycles = 0;
    wr(R_CTRL, 1);
    while (!done) @(negedge clk);
    n_overlap += int'(overlap_cycles);
    n_stall   += int'(stall_cycles);

    // compare
    checks += 2;
    if (int'(label) != exp_label) begin failures++; $display("label %0d exp %0d", label, exp_label); end
    if (int'(best) != exp_best) begin failures++; $display("best %0d exp %0d", best, exp_best); end
    for (int k = 0; k < ncls; k++) begin
      checks++;
      if (int'(scores[k]) != rbuf[nlay % 2][k]) begin
        failures++; $display("score %0d: %0d exp %0d", k, scores[k], rbuf[nlay % 2][k]);
      end
    end
    for (int j = 0; j < hidden; j++) begin
      int v;
      v = (nlay % 2 == 0) ? int'(u_dut.u_fbuf1.mem[j]) : int'(u_dut.u_fbuf0.mem[j]);
      checks++;
      if (v != rbuf[(nlay + 1) % 2][j]) begin failures++; $display("hidden %0d: %0d exp %0d", j, v, rbuf[(nlay+1)%2][j]); end
    end
    $display("%s: label %0d, %0d cycles = %0d ns per pixel at 250 MHz, stall %0d, overlap %0d",
             name, label, n_cycles, 4 * n_cycles, stall_cycles, overlap_cycles);
  endtask

  task automatic reset_dut();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
  endtask

  task automatic require(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never seen: %s", what); end
    else $display("mechanism %s: %0d", what, n);
  endtask
