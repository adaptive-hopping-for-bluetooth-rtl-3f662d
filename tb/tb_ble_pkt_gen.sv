// tb_ble_pkt_gen: compares generated packets with a reference built here.
//
// The reference follows the Bluetooth Core specification's own register
// descriptions rather than the block's LSB-first forms: the CRC is the
// MSB-first shift register x^24+x^10+x^9+x^6+x^4+x^3+x+1 (0x00065B) preset
// with the CRC initial value and sent from bit 23 down, and the whitening
// register has position 0 set to 1 and the channel index in positions 1..6
// (LSB in position 6), output from position 6 and fed back into positions 0
// and 4. Each packet's bits are sampled at sym_valid; the test checks the
// bit count, the 1 us symbol spacing (CLKS_PER_SYM cycles) and `done`.
`timescale 1ns/1ps
module tb_ble_pkt_gen;
  import cd_pkg::*;
  localparam int CPS = 100;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] aa;
  logic [23:0] crc_init;
  ch_idx_t channel;
  logic [MAX_PDU-1:0][7:0] pdu;
  logic busy, sym_valid, bit_out, done;
  int checks = 0, failures = 0;

  ble_pkt_gen #(.CLKS_PER_SYM(CPS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
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

  bit ref_bits[$], got_bits[$];

  task automatic build_ref(input int len);
    logic [23:0] r;
    bit w[7], o, d;
    bit pdu_bits[$];
    ref_bits.delete();
    for (int i = 0; i < 8; i++) ref_bits.push_back(aa[0] ? (8'h55 >> i) & 1 : (8'hAA >> i) & 1);
    for (int i = 0; i < 32; i++) ref_bits.push_back(aa[i]);
    r = crc_init;
    for (int b = 0; b < len; b++)
      for (int i = 0; i < 8; i++) begin
        d = pdu[b][i];
        pdu_bits.push_back(d);
        o = r[23] ^ d;
        r = r << 1;
        if (o) r = r ^ 24'h00065B;
      end
    for (int i = 23; i >= 0; i--) pdu_bits.push_back(r[i]);
    w[0] = 1;
    for (int i = 1; i <= 6; i++) w[i] = channel[6 - i];
    foreach (pdu_bits[i]) begin
      o = w[6];
      ref_bits.push_back(pdu_bits[i] ^ o);
      for (int j = 6; j > 0; j--) w[j] = w[j - 1];
      w[0] = o;
      w[4] = w[4] ^ o;
    end
  endtask

  task automatic send(input int len);
    int last_sym, spacing_bad;
    got_bits.delete();
    build_ref(len);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    last_sym = -1; spacing_bad = 0;
    for (int cyc = 0; !done; cyc++) begin
      @(posedge clk); #1;
      if (sym_valid) begin
        got_bits.push_back(bit_out);
        if (last_sym >= 0 && cyc - last_sym != CPS) spacing_bad++;
        last_sym = cyc;
      end
    end
    check("bit count", got_bits.size(), ref_bits.size());
    check("symbol spacing", spacing_bad, 0);
    for (int i = 0; i < ref_bits.size() && i < got_bits.size(); i++)
      check($sformatf("bit %0d", i), int'(got_bits[i]), int'(ref_bits[i]));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // advertising packet on channel 37
    aa = 32'h8E89BED6; crc_init = 24'h555555; channel = 6'd37;
    foreach (pdu[i]) pdu[i] = 8'($urandom);
    pdu[0] = 8'h02; pdu[1] = 8'd20;
    send(22);
    // data channel packet with random link parameters
    aa = $urandom | 32'h1; crc_init = 24'($urandom); channel = 6'd15;
    foreach (pdu[i]) pdu[i] = 8'($urandom);
    pdu[1] = 8'd37;
    send(39);
    // empty PDU on channel 30
    aa = $urandom & ~32'h1; crc_init = 24'($urandom); channel = 6'd30;
    pdu[0] = 8'h01; pdu[1] = 8'd0;
    send(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
