// tb_hop_select: checks the hopping control against reference models.
//
// Algorithm #2 is checked first against the Bluetooth Core specification's
// sample data (access address 0x8E89BED6: all 37 channels used, counters
// 0..3 give 25, 20, 6, 21; with channels 9,10,21,22,23,33,34,35,36 used,
// counters 6..8 give 23, 9, 34). Then both algorithms are compared over
// random access addresses, hop increments and used maps with models written
// here in their iterative specification form (algorithm #1 keeps its last
// unmapped channel), and the fixed channel mode, the channel scan (counter
// mod 40, all 40 channels in turn) and the one-cycle latency are checked.
`timescale 1ns/1ps
module tb_hop_select;
  import cd_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, valid;
  hop_cfg_t cfg;
  logic [15:0] counter;
  ch_idx_t channel;
  int checks = 0, failures = 0;

  hop_select dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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

  task automatic run(input logic [15:0] n, output int ch);
    @(negedge clk); counter = n; start = 1;
    @(negedge clk); start = 0;
    check("valid one cycle after start", int'(valid), 1);
    ch = int'(channel);
  endtask

  function automatic logic [15:0] rev8x2(input logic [15:0] a);
    logic [15:0] r = '0;
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < 8; i++) r[b*8 + 7 - i] = a[b*8 + i];
    return r;
  endfunction

  function automatic int ref_csa2(input int n, input logic [31:0] aa, input logic [36:0] m);
    int cid, u, prn, tbl[$];
    cid = int'(aa[31:16] ^ aa[15:0]);
    u = n ^ cid;
    for (int r = 0; r < 3; r++) u = (int'(rev8x2(16'(u))) * 17 + cid) % 65536;
    prn = u ^ cid;
    for (int c = 0; c < 37; c++) if (m[c]) tbl.push_back(c);
    if (m[prn % 37]) return prn % 37;
    return tbl[(tbl.size() * prn) / 65536];
  endfunction

  int got, last, tbl[$];
  logic [36:0] m9;

  initial begin
    cfg = '{alg: HOP_CSA2, hop: 5'd7, aa: 32'h8E89BED6, used_map: '1, fixed_ch: 6'd0};
    counter = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // specification sample data
    run(0, got); check("csa2 sample cnt0", got, 25);
    run(1, got); check("csa2 sample cnt1", got, 20);
    run(2, got); check("csa2 sample cnt2", got, 6);
    run(3, got); check("csa2 sample cnt3", got, 21);
    m9 = '0;
    foreach (m9[i]) if (i inside {9, 10, 21, 22, 23, 33, 34, 35, 36}) m9[i] = 1'b1;
    cfg.used_map = m9;
    run(6, got); check("csa2 9ch cnt6", got, 23);
    run(7, got); check("csa2 9ch cnt7", got, 9);
    run(8, got); check("csa2 9ch cnt8", got, 34);
    // random algorithm #2
    for (int t = 0; t < 20; t++) begin
      cfg.aa = $urandom;
      cfg.used_map = {$urandom, $urandom} | (37'd1 << ($urandom % 37));
      for (int n = 0; n < 10; n++) begin
        counter = 16'($urandom);
        run(counter, got);
        check("csa2 random", got, ref_csa2(int'(counter), cfg.aa, cfg.used_map));
      end
    end
    // algorithm #1, iterative reference from event 0
    cfg.alg = HOP_CSA1;
    for (int t = 0; t < 8; t++) begin
      cfg.hop = 5'(5 + $urandom % 12);
      cfg.used_map = (t == 0) ? '1 : ({$urandom, $urandom} | 37'h1);
      tbl.delete();
      for (int c = 0; c < 37; c++) if (cfg.used_map[c]) tbl.push_back(c);
      last = 0;
      for (int n = 0; n < 60; n++) begin
        last = (last + int'(cfg.hop)) % 37;
        run(16'(n), got);
        check("csa1", got, cfg.used_map[last] ? last : tbl[last % tbl.size()]);
      end
    end
    // self defined channel
    cfg.alg = HOP_FIXED; cfg.fixed_ch = 6'd38;
    run(5, got); check("fixed channel", got, 38);
    // channel scan: every channel in turn, including the advertising ones
    cfg.alg = HOP_SCAN;
    for (int n = 0; n < 85; n++) begin
      run(16'(n), got); check("scan", got, n % 40);
    end
    run(16'hFFFF, got); check("scan at counter 65535", got, 65535 % 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
