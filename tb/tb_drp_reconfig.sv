// tb_drp_reconfig: loads clock states into a DRP register model.
//
// The model answers each DRP access L cycles after den and keeps 128
// registers preset to random values; `locked` drops with the MMCM reset and
// returns LOCK_CYCLES after it is released. For several states the test
// checks that every register the state names ends up as
// (old & mask) | data, that no other register changes, that every access
// happens while the MMCM is held in reset, that the reset lasts exactly
// 17 * (4 + 2L) cycles (two ROM cycles and two DRP round trips per word) and
// that `done` comes only after lock returns.
`timescale 1ns/1ps
module tb_drp_reconfig;
  import cd_pkg::*;
  localparam int L = 3, LOCK_CYCLES = 40;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  state_idx_t state = 0, rom_state;
  logic [4:0] rom_word;
  drp_word_t rom_data;
  logic den, dwe, drdy = 0, mmcm_rst, locked = 1;
  logic [6:0] daddr;
  logic [15:0] di, do_i = 0;
  int checks = 0, failures = 0;

  drp_reconfig dut (.*);
  always #5 clk = ~clk;

  // ROM: same one-cycle read as clk_state_table
  always_ff @(posedge clk) rom_data <= drp_word_of_state(rom_state, rom_word);

  // DRP register model
  logic [15:0] regs [128];
  logic [15:0] prev_regs [128];
  int pend = -1, lat = 0, lock_cnt = 0, rst_cycles = 0, bad_access = 0;
  logic [6:0] a_q; logic we_q; logic [15:0] d_q;
  always_ff @(posedge clk) if (rst_n) begin
    drdy <= 0;
    if (den) begin
      if (!mmcm_rst) bad_access++;
      a_q <= daddr; we_q <= dwe; d_q <= di; lat <= L - 2; pend <= 1;  // drdy L cycles after den
    end else if (pend == 1) begin
      if (lat == 0) begin
        pend <= -1; drdy <= 1;
        if (we_q) regs[a_q] <= d_q; else do_i <= regs[a_q];
      end else lat <= lat - 1;
    end
    if (mmcm_rst) begin locked <= 0; lock_cnt <= LOCK_CYCLES; rst_cycles++; end
    else if (lock_cnt > 0) lock_cnt <= lock_cnt - 1;
    else locked <= 1;
  end

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
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  int k_list[5] = '{1, 7, 20, 33, 39};
  logic [15:0] exp_regs [128];
  drp_word_t w;
  bit touched [128];

  initial begin
    foreach (regs[i]) regs[i] = 16'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (k_list[t]) begin
      foreach (regs[i]) begin prev_regs[i] = regs[i]; exp_regs[i] = regs[i]; touched[i] = 0; end
      for (int i = 0; i < 17; i++) begin
        w = drp_word_of_state(6'(k_list[t]), 5'(i));
        exp_regs[w.addr] = (exp_regs[w.addr] & w.mask) | w.data;
      end
      rst_cycles = 0; bad_access = 0;
      @(negedge clk); state = 6'(k_list[t]); start = 1;
      @(negedge clk); start = 0;
      while (!done) begin
        @(negedge clk);
        if (done && lock_cnt != 0) begin failures++; $display("FAIL done before lock"); end
      end
      check("done only after lock", int'(locked), 1);
      check("reset cycles", rst_cycles, 17 * (4 + 2 * L));
      check("accesses under reset", bad_access, 0);
      foreach (regs[i]) check($sformatf("state %0d reg %0h", k_list[t], i), int'(regs[i]), int'(exp_regs[i]));
      check("idle after done", int'(busy), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
