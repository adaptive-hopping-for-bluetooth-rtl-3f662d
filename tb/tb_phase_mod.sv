// tb_phase_mod: checks the symbol phases and the switch clock.
//
// Drives the bit sequence of the paper's example, 0,1,1,0,1,0,1,1, and
// expects the switch phase 0,pi,0,0,pi,pi,0,pi. During each symbol the switch
// output is sampled against the 0 and 180 degree clocks generated here; with
// a post-divide of 2 and 4 the number of switch edges per window is checked
// (half and quarter of the clock's). With enable low the switch stays low.
`timescale 1ns/1ps
module tb_phase_mod;
  logic clk = 0, rst_n = 0, enable = 0, sym_valid = 0, bit_in = 0;
  logic [3:0] clk_ph = 4'b0000;
  logic [1:0] post_log2 = 0;
  logic phase_pi, rf_switch;
  int checks = 0, failures = 0;

  phase_mod dut (.*);
  always #5 clk = ~clk;
  // 16 ns modulation clock in four phases
  always begin
    clk_ph[0] = 1; #4 clk_ph[3] = 0; clk_ph[1] = 1; #4 clk_ph[0] = 0; clk_ph[2] = 1;
    #4 clk_ph[1] = 0; clk_ph[3] = 1; #4 clk_ph[2] = 0;
  end

  initial begin
    #2ms;
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

  int bits[8]  = '{0, 1, 1, 0, 1, 0, 1, 1};
  int phase[8] = '{0, 1, 0, 0, 1, 1, 0, 1};
  int mism, edges_rf, edges_clk;
  logic rf_q, ck_q;

  initial begin
    #23 rst_n = 1;
    @(negedge clk); enable = 1;
    foreach (bits[i]) begin
      @(negedge clk); sym_valid = 1; bit_in = bits[i][0];
      @(negedge clk); sym_valid = 0;
      check($sformatf("symbol %0d phase", i), int'(phase_pi), phase[i]);
      mism = 0;
      #1;  // sample on odd nanoseconds, clear of the 4 ns clock edges
      for (int s = 0; s < 40; s++) begin
        #2;
        if (rf_switch != (phase[i] ? clk_ph[2] : clk_ph[0])) mism++;
      end
      check($sformatf("symbol %0d switch follows clock", i), mism, 0);
    end
    // fabric post-divide
    for (int p = 1; p <= 2; p++) begin
      post_log2 = 2'(p);
      #100;
      edges_rf = 0; edges_clk = 0; rf_q = rf_switch; ck_q = clk_ph[0];
      for (int s = 0; s < 6400; s++) begin
        #0.5;
        if (rf_switch && !rf_q) edges_rf++;
        if (clk_ph[0] && !ck_q) edges_clk++;
        rf_q = rf_switch; ck_q = clk_ph[0];
      end
      check($sformatf("post divide %0d", 1 << p), edges_rf * (1 << p), edges_clk);
    end
    enable = 0;
    #40;
    mism = 0;
    for (int s = 0; s < 50; s++) begin #1.1; if (rf_switch) mism++; end
    check("switch off when disabled", mism, 0);
    check("phase reset when disabled", int'(phase_pi), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
