// tb_workload_hopping: the hopping workloads, run on the hopping and
// clock-state blocks.
//
// 1. Channel selection algorithms over the first 1000 events with the
//    target used map restricted to data channels 17..31 (15 channels), once
//    with algorithm #1 (hop 7) and once with algorithm #2 (access address
//    0x8E89BED6). Each event's channel must be a used channel and equal the
//    specification model; the per-channel counts are printed next to the
//    model's counts for the channels 18..22 and must match. For algorithm
//    #1 channels 18..21 must each get 81 events, the expected count of the
//    original evaluation (its algorithm #2 counts depend on an access
//    address it does not give).
// 2. The hopping spectrum case: excitation fixed on channel 33, 34 or 35,
//    targets hopping over channels 22..26. Each pair's state must be the RF
//    distance |rf(exc) - rf(tgt)| (7..13, 14..26 MHz), be served directly by
//    the MMCM (no post-divide) and decode back to a 2k MHz clock.
// 3. Every one of the 40 x 40 pairs maps to a state 0..39 and every state
//    1..39 is reached by some pair.
`timescale 1ns/1ps
module tb_workload_hopping;
  import cd_pkg::*;
  import tb_edge_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, valid;
  hop_cfg_t cfg;
  logic [15:0] counter = 0;
  ch_idx_t channel, exc_ch = 0, tgt_ch = 0;
  state_idx_t state, rd_state = 0;
  logic [1:0] post_log2;
  logic [4:0] rd_word = 0;
  drp_word_t rd_data;
  int checks = 0, failures = 0;

  hop_select u_hop (.clk, .rst_n, .start, .cfg, .counter, .valid, .channel);
  clk_state_table u_tab (.clk, .exc_ch, .tgt_ch, .state, .post_log2, .rd_state, .rd_word, .rd_data);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic hop(input int n, output int ch);
    @(negedge clk); counter = 16'(n); start = 1;
    @(negedge clk); start = 0;
    ch = int'(channel);
  endtask

  task automatic pair(input int e, input int t, output int st, output int post);
    @(negedge clk); exc_ch = 6'(e); tgt_ch = 6'(t);
    @(negedge clk);
    st = int'(state); post = int'(post_log2);
  endtask

  int hist[40], ref_hist[40], reached[40];
  logic [36:0] m;
  int ch, exp_ch, st, post, k, bad;

  initial begin
    m = '0;
    for (int c = 17; c <= 31; c++) m[c] = 1'b1;
    cfg = '{alg: HOP_CSA1, hop: 5'd7, aa: 32'h8E89BED6, used_map: m, fixed_ch: 6'd0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. 1000 events of each algorithm
    for (int a = 1; a <= 2; a++) begin
      cfg.alg = hop_alg_e'(a);
      foreach (hist[i]) begin hist[i] = 0; ref_hist[i] = 0; end
      bad = 0;
      for (int n = 0; n < 1000; n++) begin
        hop(n, ch);
        exp_ch = (a == 1) ? ref_csa1(n, 7, m) : ref_csa2(n, 32'h8E89BED6, m);
        if (ch != exp_ch || !m[ch]) bad++;
        hist[ch]++; ref_hist[exp_ch]++;
      end
      check($sformatf("algorithm #%0d: events off the model or the map", a), bad, 0);
      for (int c = 18; c <= 22; c++) begin
        $display("algorithm #%0d channel %0d: %0d hops (model %0d)", a, c, hist[c], ref_hist[c]);
        check("hop count", hist[c], ref_hist[c]);
        // the expected count the original evaluation gives for algorithm #1
        if (a == 1 && c <= 21) check("algorithm #1: 81 hops per channel", hist[c], 81);
      end
    end
    // 2. excitation 33..35 to targets 22..26
    for (int e = 33; e <= 35; e++)
      for (int t = 22; t <= 26; t++) begin
        pair(e, t, st, post);
        k = rf_of(e) - rf_of(t);
        if (k < 0) k = -k;
        check($sformatf("state %0d -> %0d", e, t), st, k);
        check("no post-divide", post, 0);
        check("frequency of the state", 100 * factors_of_state(6'(st)).mul
              / (factors_of_state(6'(st)).div * factors_of_state(6'(st)).clk0_div), 2 * k);
      end
    // 3. the whole 40 x 40 map
    bad = 0;
    for (int e = 0; e < 40; e++)
      for (int t = 0; t < 40; t++) begin
        pair(e, t, st, post);
        k = rf_of(e) - rf_of(t);
        if (k < 0) k = -k;
        if (st != k) bad++;
        reached[st]++;
      end
    check("40 x 40 pairs", bad, 0);
    for (int s = 1; s <= 39; s++) check($sformatf("state %0d reached", s), reached[s] > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
