// tb_ask_demod: slices a noisy envelope into bits and finds the carrier.
//
// The envelope is generated here: on level about 1500, off level about 100,
// uniform noise of +-40 counts, 50 samples per bit with the transmitter's
// bit clock 0.8% slow against the tag's. A downlink frame (200 random payload
// bits after bit stuffing, no run of ones above five) is sent twice and the
// recovered bit stream must contain it exactly, both times; no carrier may be
// flagged during it. Then a 3200-sample carrier must raise `carrier`
// CARRIER_BITS bit periods after it starts (within two samples) and hold it
// to the end; the flag must drop at once when the carrier stops.
`timescale 1ns/1ps
module tb_ask_demod;
  import tb_edge_pkg::*;
  localparam int SPB = 50, CB = 8;
  logic clk = 0, rst_n = 0, sample_valid = 0;
  logic [11:0] sample = 0;
  logic level, bit_valid, bit_out, carrier;
  int checks = 0, failures = 0;

  ask_demod #(.SAMPLES_PER_BIT(SPB), .CARRIER_BITS(CB)) dut (.*);
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

  bit got_bits[$];
  int carrier_during_data = 0;
  always @(posedge clk) if (bit_valid) got_bits.push_back(bit_out);

  task automatic put(input bit on);
    @(negedge clk);
    sample_valid = 1;
    sample = 12'((on ? 1500 : 100) + int'($urandom % 81) - 40);
  endtask

  task automatic send_bits(input bitq_t q);
    real t = 0.0;
    foreach (q[i]) begin
      t += SPB * 1.008;
      while (t >= 1.0) begin put(q[i]); t -= 1.0; if (carrier) carrier_during_data++; end
    end
  endtask

  function automatic bit contains(input bitq_t hay, input bitq_t needle, input int from);
    for (int s = from; s + needle.size() <= hay.size(); s++) begin
      bit ok = 1;
      foreach (needle[i]) if (hay[s + i] != needle[i]) begin ok = 0; break; end
      if (ok) return 1;
    end
    return 0;
  endfunction

  bitq_t tx, pre;
  byteq_t pl;
  int rise_at, n_after;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) put(0);
    for (int i = 0; i < 16; i++) pre.push_back(i % 2);
    for (int i = 0; i < 25; i++) pl.push_back(byte'($urandom));
    tx = frame_bits(8'h08, pl);
    send_bits(pre); send_bits(tx);
    for (int i = 0; i < 300; i++) put(0);
    check("first frame recovered", int'(contains(got_bits, tx, 0)), 1);
    n_after = got_bits.size();
    send_bits(pre); send_bits(tx);
    for (int i = 0; i < 300; i++) put(0);
    check("second frame recovered", int'(contains(got_bits, tx, n_after)), 1);
    check("no carrier during data", carrier_during_data, 0);
    // carrier
    rise_at = -1;
    for (int i = 0; i < 3200; i++) begin
      put(1);
      if (carrier && rise_at < 0) rise_at = i;
      if (rise_at >= 0 && !carrier) n_after++;
    end
    checks++;
    if (rise_at < CB * SPB || rise_at > CB * SPB + 2) begin
      failures++; $display("FAIL carrier rise at sample %0d", rise_at);
    end
    check("carrier held", int'(carrier), 1);
    put(0); put(0); put(0);
    check("carrier drop", int'(carrier), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
