// tb_clk_state_table: checks the channel-pair lookup and the clock-state words.
//
// The pair lookup is compared, for all 40 x 40 pairs, with the channel
// distance computed here from the BLE channel frequencies (2402 MHz for 37,
// 2404 + 2c for data channels 0..10, 2426 for 38, 2406 + 2c for 11..36,
// 2480 for 39), including the example of the modulation section (excitation
// on channel 4, targets 6 and 2: one 4 MHz clock). For every state the words
// are decoded back into MUL, DIV and CLK0_DIVIDE and the output frequency
// 100 MHz * MUL / DIV / CLK0_DIVIDE / post must equal 2k MHz with the VCO in
// 600..1200 MHz; the word addresses must follow the load order and the 180
// degree clock must be offset by half a period. Both ports have one cycle of
// latency.
`timescale 1ns/1ps
module tb_clk_state_table;
  import cd_pkg::*;
  logic clk = 0;
  ch_idx_t exc_ch = 0, tgt_ch = 0;
  state_idx_t state, rd_state = 0;
  logic [1:0] post_log2;
  logic [4:0] rd_word = 0;
  drp_word_t rd_data;
  int checks = 0, failures = 0;

  clk_state_table dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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

  function automatic int freq(input int c);
    if (c == 37) return 2402;
    if (c == 38) return 2426;
    if (c == 39) return 2480;
    if (c <= 10) return 2404 + 2 * c;
    return 2406 + 2 * c;
  endfunction

  int exp_addr[17] = '{'h28, 'h08, 'h09, 'h0A, 'h0B, 'h0C, 'h0D, 'h0E, 'h0F,
                       'h16, 'h14, 'h15, 'h18, 'h19, 'h1A, 'h4E, 'h4F};
  int post_of[40];
  drp_word_t w[17];
  int o, m, d, hi, lo, e, exp_state;
  real f;

  initial begin
    check("word is 39 bits", $bits(drp_word_t), 39);
    // pair lookup
    for (int a = 0; a < 40; a++)
      for (int b = 0; b < 40; b++) begin
        @(negedge clk); exc_ch = 6'(a); tgt_ch = 6'(b);
        @(negedge clk);
        exp_state = (freq(a) > freq(b) ? freq(a) - freq(b) : freq(b) - freq(a)) / 2;
        check($sformatf("state[%0d][%0d]", a, b), int'(state), exp_state);
        if (state != 0) post_of[state] = int'(post_log2);
      end
    @(negedge clk); exc_ch = 4; tgt_ch = 6; @(negedge clk); check("ch4->ch6 4 MHz", int'(state), 2);
    @(negedge clk); exc_ch = 4; tgt_ch = 2; @(negedge clk); check("ch4->ch2 4 MHz", int'(state), 2);
    // state words
    for (int k = 1; k <= 39; k++) begin
      for (int i = 0; i < 17; i++) begin
        @(negedge clk); rd_state = 6'(k); rd_word = 5'(i);
        @(negedge clk); w[i] = rd_data;
        check($sformatf("state %0d word %0d address", k, i), int'(w[i].addr), exp_addr[i]);
      end
      // decode: output counter (CLKOUT0 reg1/reg2), feedback, input divider
      hi = int'(w[1].data[11:6]); lo = int'(w[1].data[5:0]);
      o  = w[2].data[6] ? 1 : hi + lo;
      m  = w[11].data[6] ? 1 : int'(w[10].data[11:6]) + int'(w[10].data[5:0]);
      d  = w[9].data[12] ? 1 : int'(w[9].data[11:6]) + int'(w[9].data[5:0]);
      f  = 100.0 * m / d / o / (1 << post_of[k]);
      checks++;
      if (f < 2.0 * k - 1e-6 || f > 2.0 * k + 1e-6) begin
        failures++; $display("FAIL state %0d frequency %f", k, f);
      end
      checks++;
      if (100.0 * m / d < 600.0 || 100.0 * m / d > 1200.0) begin
        failures++; $display("FAIL state %0d VCO %f", k, 100.0 * m / d);
      end
      // CLKOUT2 (180 degrees): delay*8 + phase mux = 4 * O eighths
      e = int'(w[6].data[5:0]) * 8 + int'(w[5].data[15:13]);
      check($sformatf("state %0d 180 deg", k), e, 4 * o);
      check($sformatf("state %0d CLKOUT2 divide", k), int'(w[5].data[11:0]), int'(w[1].data[11:0]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
