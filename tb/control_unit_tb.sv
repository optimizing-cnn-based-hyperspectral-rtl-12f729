// control_unit_tb: checks register programming and the pre-fetch schedule.
//
// The loader, layer engine and classifier are replaced by simple responders
// with programmable durations. The test programs 6 layers and checks:
//  - the input load is requested first, then weights of layers 0, 1, ...
//    into banks 0, 1, 0, ... with the programmed DDR address, lanes and a
//    word count of ceil(cout/P)*(cin+1) (P = 64 for CONV, 256 for FC);
//  - the weights of layer j are requested only after layer j-2 finished
//    (the bank is free) and at most 2 cycles after that and after the loader
//    became free (pre-fetch while computing);
//  - layer L starts only when its weights are loaded and layer L-1 is done,
//    and at most 2 cycles later (no idle gap between layers when the weights
//    are ready);
//  - every started layer sees exactly the descriptor that was written;
//  - the classifier is started with the programmed class count and bank,
//    and done pulses once.
// It runs once with short weight loads (weights hidden behind computation)
// and once with long ones (the engine must stall), and compares the stall
// and overlap counters with the cycle counts it observes itself.
module control_unit_tb;
  import hsi_pkg::*;
  localparam int NL = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 0;
  logic [7:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0;
  logic ld_valid, ld_done = 0, eng_start, eng_done = 0, layer_par;
  logic ld_ready;
  ld_req_t ld_req;
  layer_desc_t eng_desc;
  logic cls_start, cls_bank, cls_done = 0;
  logic [4:0] cls_n;
  logic busy, done;
  logic [31:0] stall_cycles, overlap_cycles;
  int checks = 0, failures = 0;

  control_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  layer_desc_t d [NL];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---- responders and schedule bookkeeping ----
  int w_load_time, comp_time;
  int ld_left = 0, eng_left = 0, cls_left = 0;
  bit ld_is_w;
  int n_req, n_started, n_finished, n_done, w_done_cnt;
  int t_ld_free, t_finish [NL], t_wdone [NL];
  int my_stall, my_overlap;
  bit eng_active;
  assign ld_ready = (ld_left == 0);

  always @(posedge clk) begin
    ld_done <= 1'b0; eng_done <= 1'b0; cls_done <= 1'b0;
    if (ld_left > 0) begin
      ld_left <= ld_left - 1;
      if (ld_left == 1) begin
        ld_done <= 1'b1; t_ld_free <= cyc + 2;
        if (ld_is_w) begin t_wdone[w_done_cnt] <= cyc + 1; w_done_cnt <= w_done_cnt + 1; end
      end
    end
    if (ld_valid && ld_left == 0) begin
      automatic int j = n_req - 1;
      ld_is_w <= (n_req > 0);
      ld_left <= (n_req == 0) ? 20 : w_load_time;
      checks++;
      if (n_req == 0) begin
        if (ld_req.kind != LD_INPUT || ld_req.ddr != 32'd77 || ld_req.count != 16'd50) begin
          failures++; $display("input request wrong");
        end
      end else begin
        automatic int p = (d[j].kind == L_FC) ? 256 : 64;
        automatic int words = (int'(d[j].cout) + p - 1) / p * (int'(d[j].cin) + 1);
        if (ld_req.kind != LD_WEIGHT || ld_req.bank != j[0] || ld_req.ddr != d[j].w_ddr
            || int'(ld_req.count) != words || ld_req.lanes != d[j].w_lanes) begin
          failures++; $display("weight request %0d wrong", j);
        end
        // bank free: layer j-2 finished; prompt: within 2 cycles
        checks += 2;
        if (j >= 2 && n_finished < j - 1) begin failures++; $display("W%0d too early", j); end
        begin
          automatic int ready_t = t_ld_free;
          if (j >= 2 && t_finish[j-2] + 2 > ready_t) ready_t = t_finish[j-2] + 2;
          if (cyc > ready_t + 2) begin failures++; $display("W%0d late %0d > %0d", j, cyc, ready_t); end
        end
      end
      n_req <= n_req + 1;
    end
    if (eng_left > 0) begin
      eng_left <= eng_left - 1;
      if (eng_left == 1) begin
        eng_done <= 1'b1; eng_active <= 0;
        t_finish[n_finished] <= cyc + 1; n_finished <= n_finished + 1;
      end
    end
    if (eng_start) begin
      automatic int L = n_started;
      eng_left <= comp_time; eng_active <= 1;
      checks += 4;
      if (eng_desc != d[L]) begin failures++; $display("descriptor %0d wrong", L); end
      if (layer_par != L[0]) failures++;
      if (w_done_cnt <= L || n_finished != L) begin failures++; $display("L%0d started early", L); end
      begin
        automatic int ready_t = t_wdone[L];
        if (L > 0 && t_finish[L-1] > ready_t) ready_t = t_finish[L-1];
        if (cyc > ready_t + 2) begin failures++; $display("L%0d late %0d > %0d", L, cyc, ready_t); end
      end
      n_started <= n_started + 1;
    end
    if (cls_start) begin
      checks += 2;
      cls_left <= 4;
      if (n_finished != NL || int'(cls_n) != 9) failures++;
      if (cls_bank != 1'(NL % 2)) failures++;
    end
    if (cls_left > 0) begin cls_left <= cls_left - 1; if (cls_left == 1) cls_done <= 1'b1; end
    if (done) n_done <= n_done + 1;
    // the counters' definitions, from the outside
    if (busy && !eng_active && !eng_start && n_finished < NL && n_req > 0 && t_ld_free > 0
        && w_done_cnt <= n_finished && !(n_req == 1 && ld_left > 0))
      my_stall <= my_stall + 1;
    if ((eng_active || eng_done) && (ld_left > 0 || ld_done) && ld_is_w) my_overlap <= my_overlap + 1;
  end

  task automatic wr(input int a, input int v);
    @(negedge clk); cfg_we = 1; cfg_addr = 8'(a); cfg_wdata = 32'(v);
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic run(input int wl, input int ct);
    w_load_time = wl; comp_time = ct;
    n_req = 0; n_started = 0; n_finished = 0; n_done = 0; w_done_cnt = 0; t_ld_free = 0;
    my_stall = 0; my_overlap = 0; eng_active = 0;
    wr(R_CTRL, 1);
    while (n_done == 0) @(negedge clk);
    repeat (10) @(negedge clk);
    checks += 4;
    if (n_done != 1 || busy) failures++;
    if (n_req != NL + 1) begin failures++; $display("requests %0d", n_req); end
    if (stall_cycles != 32'(my_stall)) begin failures++; $display("stall %0d vs %0d", stall_cycles, my_stall); end
    if (overlap_cycles != 32'(my_overlap)) begin failures++; $display("overlap %0d vs %0d", overlap_cycles, my_overlap); end
    $display("load %0d compute %0d: stall %0d overlap %0d", wl, ct, stall_cycles, overlap_cycles);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int L = 0; L < NL; L++) begin
      d[L] = '0;
      d[L].kind    = (L == 0) ? L_CONV1 : (L < 4 ? L_CONV3 : L_FC);
      d[L].relu    = (L != NL - 1);
      d[L].in_h    = 16'($urandom_range(1, 9));
      d[L].in_w    = 16'($urandom);
      d[L].cin     = 16'($urandom_range(1, 300));
      d[L].cout    = 16'($urandom_range(1, 300));
      d[L].groups  = 16'($urandom);
      d[L].in_gs   = 16'($urandom);  d[L].out_gs = 16'($urandom);
      d[L].in_rs   = 16'($urandom);  d[L].in_cs  = 16'($urandom);  d[L].in_ks = 16'($urandom);
      d[L].out_rs  = 16'($urandom);  d[L].out_cs = 16'($urandom);  d[L].out_ks = 16'($urandom);
      d[L].w_ddr   = $urandom;
      d[L].w_lanes = 16'(8 * $urandom_range(1, 72));
      wr(32 + 16*L + 0, {27'd0, d[L].relu, 2'b00, 2'(d[L].kind)});
      wr(32 + 16*L + 1, d[L].in_h);   wr(32 + 16*L + 2, d[L].in_w);
      wr(32 + 16*L + 3, d[L].cin);    wr(32 + 16*L + 4, d[L].cout);
      wr(32 + 16*L + 5, d[L].groups); wr(32 + 16*L + 6, d[L].in_gs);
      wr(32 + 16*L + 7, d[L].out_gs); wr(32 + 16*L + 8, d[L].in_rs);
      wr(32 + 16*L + 9, d[L].in_cs);  wr(32 + 16*L + 10, d[L].in_ks);
      wr(32 + 16*L + 11, d[L].out_rs); wr(32 + 16*L + 12, d[L].out_cs);
      wr(32 + 16*L + 13, d[L].out_ks); wr(32 + 16*L + 14, int'(d[L].w_ddr));
      wr(32 + 16*L + 15, d[L].w_lanes);
    end
    wr(R_NLAYERS, NL); wr(R_IN_DDR, 77); wr(R_IN_LEN, 50); wr(R_NCLASS, 9);
    run(30, 100);        // weights hidden behind computation
    checks++;
    if (overlap_cycles == 0) failures++;
    run(300, 40);        // weight transfer dominates: the engine stalls
    checks++;
    if (stall_cycles < 32'(4 * 250)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
