// tb_tag_ctrl: runs the hopping sequencer against simple stand-ins.
//
// The stand-ins answer like the real blocks: channels one cycle after
// hop_start, a clock state that depends on the excitation counter (counters
// 2m and 2m+1 share a state, so every second packet reuses the loaded one,
// and counters 6 and 7 give state 0, a pair with no frequency shift), a
// reconfiguration that takes CFG_CYCLES and a packet that takes PKT_CYCLES.
// The test checks: nothing before START; the reload, reuse and no-shift
// decisions; the state handed to the loader; the cycle count from hop_start
// to cfg_start and from carrier to pkt_start; that mod_enable covers exactly
// the packet; the self increment after each carrier; a counter command that
// agrees with the tag, one that corrects it, one that arrives during a packet
// and is applied afterwards; a configuration change restarting the target
// counter; and STOP returning the tag to idle.
`timescale 1ns/1ps
module tb_tag_ctrl;
  import cd_pkg::*;
  localparam int CFG_CYCLES = 30;
  localparam int PKT_CYCLES = 60;

  logic clk = 0, rst_n = 0;
  logic run = 0, exc_cnt_load = 0, cfg_changed = 0, carrier = 0;
  logic [15:0] exc_cnt_value = 0;
  logic hop_start, hop_valid = 0;
  logic [15:0] exc_counter, tgt_counter;
  state_idx_t pair_state, cfg_state, loaded_state;
  logic cfg_start, cfg_done = 0, pkt_start, pkt_done = 0, mod_enable;
  logic [15:0] n_loads, n_corrections, n_self_inc, n_reloads, n_reuse, n_packets, n_no_shift;
  int checks = 0, failures = 0;
  int cyc = 0, t_hop = 0, t_cfg = 0, t_car = 0, t_pkt = 0, n_cfg_start = 0;
  int cfg_left = 0, pkt_left = 0, en_cycles = 0;

  tag_ctrl dut (.*);
  always #5 clk = ~clk;

  function automatic state_idx_t state_of(input logic [15:0] c);
    logic [1:0] q = c[2:1];
    return (q == 2'd3) ? state_idx_t'(0) : state_idx_t'(q + 2'd1);
  endfunction

  // stand-ins
  always_ff @(posedge clk) if (rst_n) begin
    cyc       <= cyc + 1;
    hop_valid <= hop_start;
    if (hop_start) t_hop <= cyc;
    if (hop_valid) pair_state <= state_of(exc_counter);
    cfg_done <= 1'b0;
    if (cfg_start) begin cfg_left <= CFG_CYCLES; t_cfg <= cyc; n_cfg_start <= n_cfg_start + 1; end
    else if (cfg_left == 1) begin cfg_left <= 0; cfg_done <= 1'b1; end
    else if (cfg_left > 1) cfg_left <= cfg_left - 1;
    pkt_done <= 1'b0;
    if (pkt_start) begin pkt_left <= PKT_CYCLES; t_pkt <= cyc; end
    else if (pkt_left == 1) begin pkt_left <= 0; pkt_done <= 1'b1; end
    else if (pkt_left > 1) pkt_left <= pkt_left - 1;
    if (mod_enable) en_cycles <= en_cycles + 1;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic settle();
    repeat (CFG_CYCLES + 20) @(posedge clk);
  endtask

  // one excitation carrier of 100 cycles
  task automatic excite();
    @(negedge clk); carrier = 1; t_car = cyc;
    repeat (PKT_CYCLES + 40) @(negedge clk);
    carrier = 0;
    settle();
  endtask

  int exp_loaded, exp_reloads, exp_reuse, exp_noshift, exp_packets, en0;

  initial begin
    pair_state = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);
    check("idle: no reload before START", n_cfg_start, 0);
    @(negedge clk); run = 1;
    settle();
    check("first reload", n_reloads, 1);
    check("first state", loaded_state, 1);
    check("hop_start to cfg_start cycles", t_cfg - t_hop, 4);
    // counters 0..8: states 1,1,2,2,3,3,0,0,1
    exp_loaded = 1; exp_reloads = 1; exp_reuse = 0; exp_noshift = 0; exp_packets = 0;
    for (int c = 0; c < 9; c++) begin
      check("exc counter", exc_counter, c);
      check("tgt counter", tgt_counter, c);
      check("cfg state", cfg_state, state_of(16'(c)));
      en0 = en_cycles;
      excite();
      if (state_of(16'(c)) == 0) begin
        exp_noshift++;
        check("no packet on a no-shift pair", en_cycles - en0, 0);
      end else begin
        exp_packets++;
        check("carrier to pkt_start cycles", t_pkt - t_car, 1);
        check("mod_enable covers the packet", en_cycles - en0, PKT_CYCLES + 2);
      end
      // the next counter's decision
      if (state_of(16'(c + 1)) == 0) ;
      else if (state_of(16'(c + 1)) == exp_loaded) exp_reuse++;
      else begin exp_reloads++; exp_loaded = state_of(16'(c + 1)); end
      check("loaded state", loaded_state, exp_loaded);
      check("packets", n_packets, exp_packets);
      check("no-shift", n_no_shift, exp_noshift);
      check("reloads", n_reloads, exp_reloads);
      check("reuse", n_reuse, exp_reuse);
      check("self increments", n_self_inc, c + 1);
    end
    // a counter command that matches the tag's own count
    @(negedge clk); exc_cnt_load = 1; exc_cnt_value = 16'd9;
    @(negedge clk); exc_cnt_load = 0;
    settle();
    check("matching load", n_loads, 1);
    check("no correction", n_corrections, 0);
    check("counter kept", exc_counter, 9);
    // a correcting command: counter 20 (state 3)
    @(negedge clk); exc_cnt_load = 1; exc_cnt_value = 16'd20;
    @(negedge clk); exc_cnt_load = 0;
    settle();
    check("correcting load", n_corrections, 1);
    check("counter corrected", exc_counter, 20);
    check("state follows correction", loaded_state, 3);
    // a command during a packet is applied after it
    @(negedge clk); carrier = 1;
    repeat (10) @(negedge clk);
    check("in packet", mod_enable, 1);
    exc_cnt_load = 1; exc_cnt_value = 16'd40;
    @(negedge clk); exc_cnt_load = 0;
    repeat (PKT_CYCLES + 30) @(negedge clk);
    carrier = 0;
    settle();
    check("pending load applied", exc_counter, 40);
    check("loads", n_loads, 3);
    check("state of the pending load", loaded_state, state_of(16'd40));
    // configuration change restarts the target counter
    check("tgt counter before change", tgt_counter != 0, 1);
    @(negedge clk); cfg_changed = 1;
    @(negedge clk); cfg_changed = 0;
    settle();
    check("tgt counter restarted", tgt_counter, 0);
    // STOP
    @(negedge clk); run = 0;
    settle();
    en0 = n_packets;
    excite();
    check("no packet after STOP", n_packets, en0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
