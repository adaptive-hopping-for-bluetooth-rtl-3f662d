// tb_cd_tag_top: end-to-end test of the tag with an edge device, an envelope
// ADC and the clock manager modelled around it, all at default parameters.
//
// The edge model sends downlink frames as on-off keyed envelope samples at
// 8 MS/s (one sample every 12.5 clock cycles on average, noise of +-40
// counts, a short alternating training run before each frame) and excites
// the tag with a 2400-sample constant-envelope carrier. The MMCM model
// answers the DRP port and produces the reprogrammed clocks with real delays.
//
// The script configures the uplink link (access address, CRC initial value,
// PDU through DATA), the excitation hopping (algorithm #2 over data channels
// 17..31) and the target hopping (algorithm #1, hop 7), starts the tag and
// excites it while it gives correct, missing, corrupted and correcting
// counter commands, then switches both sides to fixed channels (a pair that
// needs the post-divided 2 MHz clock, a pair reused twice, a pair with no
// shift), restricts the target used map, scans the target over channels
// 0, 1, 2 (no shift, then the two post-divided states), and stops the tag.
//
// For every excitation the test computes, with its own models of the BLE
// channel selection algorithms, the channel pair and the clock state
// |rf(exc) - rf(tgt)|, and checks the tag's channels, the loaded state and
// whether a packet was sent. For every packet it checks the switch frequency
// (2k MHz, from the edge count over the packet) and, where the MMCM output is
// used undivided, recovers the packet bits from the switch phase against the
// 0-degree clock (a symbol's phase is 0 or pi; bit = phase change) and
// compares them with the on-air bits of the BLE packet built from the
// specification for the target channel. It also checks the DRP loading time
// against the paper's 13 us reconfiguration figure, that the DRP handshake
// was never violated, and counts each mechanism: frames accepted and
// rejected, counter loads, corrections and self increments, clock reloads
// and reuses, packets, no-shift carriers, packets under each hopping mode
// (fixed, algorithm #1, #2, scan), a post-divided state, a tag data write
// and STOP. Any mechanism that never happened is a failure.
`timescale 1ns/1ps
module tb_cd_tag_top;
  import cd_pkg::*;
  import tb_edge_pkg::*;

  localparam int SPB         = 50;     // samples per downlink bit
  localparam int CARRIER_SMP = 2400;   // 300 us excitation

  logic clk = 0, rst_n = 0;
  logic adc_valid = 0;
  logic [11:0] adc_sample = 0;
  logic tag_wr_en = 0;
  logic [7:0] tag_wr_addr = 0, tag_wr_data = 0;
  logic mmcm_den, mmcm_dwe, mmcm_rst, mmcm_drdy, mmcm_locked;
  logic [6:0] mmcm_daddr;
  logic [15:0] mmcm_di, mmcm_do;
  logic [3:0] mmcm_clk_ph;
  logic rf_switch, running, carrier, frame_ok, frame_err;
  ch_idx_t exc_ch, tgt_ch;
  state_idx_t loaded_state;
  logic [15:0] n_loads, n_corrections, n_self_inc, n_reloads, n_reuse, n_packets, n_no_shift;
  int access_errors;

  cd_tag_top dut (.*);
  mmcm_model u_mmcm (
    .DCLK(clk), .RST(mmcm_rst), .DEN(mmcm_den), .DWE(mmcm_dwe), .DADDR(mmcm_daddr),
    .DI(mmcm_di), .DO(mmcm_do), .DRDY(mmcm_drdy), .LOCKED(mmcm_locked),
    .CLKOUT(mmcm_clk_ph), .access_errors);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- edge model
  bit tx_on = 0;
  int acc = 0, nsamp = 0;
  always @(posedge clk) begin
    acc = acc + 8;
    if (acc >= 100) begin
      acc -= 100;
      adc_valid  <= 1'b1;
      adc_sample <= 12'((tx_on ? 1500 : 100) + int'($urandom % 81) - 40);
      nsamp++;
    end else begin
      adc_valid <= 1'b0;
    end
  end

  task automatic hold(input bit on, input int n);
    int target;
    tx_on = on;
    target = nsamp + n;
    wait (nsamp >= target);
  endtask

  int n_frames_sent = 0;
  task automatic send(input byte unsigned t, input byteq_t p, input bit bad_crc = 0);
    bitq_t q = frame_bits(t, p, bad_crc);
    for (int i = 0; i < 16; i++) hold(i % 2, SPB);
    foreach (q[i]) hold(q[i], SPB);
    hold(0, 10 * SPB);
    n_frames_sent++;
  endtask

  // configuration as the edge knows it
  typedef struct {
    hop_alg_e    alg;
    int          hop;
    logic [31:0] aa;
    logic [36:0] map;
    int          fixed;
  } cfg_t;
  cfg_t exc_c, tgt_c;
  int   exc_n = 0, tgt_n = 0;
  logic [31:0] link_aa = 32'h8E89BED6;
  logic [23:0] link_crc = 24'h555555;
  byteq_t pdu_ref;

  function automatic byteq_t cfg_bytes(input cfg_t c);
    byteq_t b;
    b.push_back(byte'(c.alg));
    b.push_back(byte'(c.hop));
    for (int i = 0; i < 4; i++) b.push_back(c.aa[8*i +: 8]);
    for (int i = 0; i < 5; i++) b.push_back(byte'(40'(c.map) >> (8 * i)));
    b.push_back(byte'(c.fixed));
    return b;
  endfunction

  task automatic set_exc(input cfg_t c);
    exc_c = c; tgt_n = 0;
    send(CMD_EXC_CFG, cfg_bytes(c));
  endtask
  task automatic set_tgt(input cfg_t c);
    tgt_c = c; tgt_n = 0;
    send(CMD_TGT_CFG, cfg_bytes(c));
  endtask
  task automatic set_cnt(input int n, input bit bad_crc = 0);
    byteq_t b;
    b.push_back(byte'(n)); b.push_back(byte'(n >> 8));
    if (!bad_crc) exc_n = n;
    send(CMD_EXC_CNT, b, bad_crc);
  endtask

  function automatic int channel_of(input cfg_t c, input int n);
    case (c.alg)
      HOP_CSA1: return ref_csa1(n, c.hop, c.map);
      HOP_CSA2: return ref_csa2(n, c.aa, c.map);
      HOP_SCAN: return n % 40;
      default:  return c.fixed;
    endcase
  endfunction

  // ------------------------------------------------------------ uplink monitor
  bit      in_pkt = 0;
  int      pkt_state = 0, pkt_exc = 0, pkt_tgt = 0;
  realtime t_start, t_end;
  int      sw_edges = 0, agree = 0, total = 0, n_sym = 0;
  bit      phases[$];

  always @(posedge rf_switch) if (in_pkt) sw_edges++;

  always @(posedge clk) if (rst_n) begin
    #2;
    if (dut.mod_enable) begin
      if (!in_pkt) begin
        in_pkt = 1; t_start = $realtime; sw_edges = 0;
        pkt_state = loaded_state; pkt_exc = exc_ch; pkt_tgt = tgt_ch;
        agree = 0; total = 0; phases.delete();
      end
      if (dut.sym_valid && total > 0) begin
        phases.push_back(2 * agree < total);
        agree = 0; total = 0;
      end
      if (dut.sym_valid || total > 0) begin
        agree += int'(rf_switch == mmcm_clk_ph[0]);
        total++;
      end
    end else if (in_pkt) begin
      in_pkt = 0; t_end = $realtime;
      if (total > 0) phases.push_back(2 * agree < total);
    end
  end

  // DRP loading time
  realtime t_den0 = 0, t_load = 0;
  bit      loading = 0;
  always @(posedge clk) if (rst_n) begin
    if (mmcm_den && !loading) begin loading = 1; t_den0 = $realtime; end
    if (loading && !dut.cfg_busy) begin
      loading = 0; t_load = $realtime - t_den0;
    end
  end

  // ---------------------------------------------------------------- scoreboard
  int n_mode[4] = '{0, 0, 0, 0};
  int n_post = 0, n_bits_checked = 0, n_tag_writes = 0, n_stopped = 0;
  int n_frame_ok = 0, n_frame_err = 0;
  always @(posedge clk) if (rst_n) begin
    if (frame_ok)  n_frame_ok++;
    if (frame_err) n_frame_err++;
  end

  task automatic excite_and_check(input string tag, input bit expect_run = 1);
    int ec, tc, k, pkts0, ns0, ones;
    bitq_t ref_bits;
    real f_meas, f_exp, tol;
    ec = channel_of(exc_c, exc_n);
    tc = channel_of(tgt_c, tgt_n);
    k  = rf_of(ec) - rf_of(tc);
    if (k < 0) k = -k;
    pkts0 = n_packets; ns0 = n_no_shift;
    hold(1, CARRIER_SMP);
    hold(0, 20 * SPB);
    if (!expect_run) begin
      check({tag, ": no packet when stopped"}, n_packets, pkts0);
      n_stopped++;
      return;
    end
    exc_n++; tgt_n++;
    if (k == 0) begin
      check({tag, ": no-shift pair let pass"}, n_no_shift, ns0 + 1);
      check({tag, ": no packet"}, n_packets, pkts0);
      return;
    end
    check({tag, ": one packet"}, n_packets, pkts0 + 1);
    check({tag, ": state during the packet"}, pkt_state, k);
    check({tag, ": excitation channel during the packet"}, pkt_exc, ec);
    check({tag, ": target channel during the packet"}, pkt_tgt, tc);
    n_mode[exc_c.alg]++;
    if (exc_c.alg != tgt_c.alg) n_mode[tgt_c.alg]++;
    ref_bits = ble_air_bits(link_aa, link_crc, tc, pdu_ref);
    // switch frequency over the packet
    ones = 0;
    foreach (ref_bits[i]) ones += ref_bits[i];
    f_meas = real'(sw_edges) / ((t_end - t_start) / 1000.0);
    f_exp  = 2.0 * k;
    tol    = real'(ones + 3) / ((t_end - t_start) / 1000.0);
    checks++;
    if (f_meas < f_exp - tol || f_meas > f_exp + tol) begin
      failures++;
      $display("FAIL %s: switch at %f MHz, expected %f +- %f", tag, f_meas, f_exp, tol);
    end
    if (factors_of_state(state_idx_t'(k)).post_log2 != 0) begin
      n_post++;
    end else begin
      bit prev = 0, bad = 0;
      check({tag, ": packet symbols"}, phases.size(), ref_bits.size());
      foreach (ref_bits[i]) if (i < phases.size()) begin
        if ((phases[i] ^ prev) != ref_bits[i]) bad = 1;
        prev = phases[i];
      end
      check({tag, ": packet bits from the switch phase"}, bad, 0);
      n_bits_checked++;
    end
  endtask

  // expected channels seen by the tag while it waits for the next carrier
  task automatic check_channels(input string tag);
    check({tag, ": exc channel"}, exc_ch, channel_of(exc_c, exc_n));
    check({tag, ": tgt channel"}, tgt_ch, channel_of(tgt_c, tgt_n));
  endtask

  task automatic step(input string tag);
    check_channels(tag);
    excite_and_check(tag);
  endtask

  // ---------------------------------------------------------------- script
  initial begin
    byteq_t b;
    cfg_t c;
    repeat (5) @(posedge clk);
    rst_n = 1;
    hold(0, 40 * SPB);

    // uplink link and PDU: LL data header, 10 payload bytes
    link_aa = 32'h71764129; link_crc = 24'h3A5C96;
    b = {};
    for (int i = 0; i < 4; i++) b.push_back(link_aa[8*i +: 8]);
    for (int i = 0; i < 3; i++) b.push_back(link_crc[8*i +: 8]);
    send(CMD_LINK_CFG, b);
    pdu_ref = {8'h02, 8'd10};
    for (int i = 0; i < 10; i++) pdu_ref.push_back(byte'(8'h30 + i * 7));
    b = {8'd0};
    foreach (pdu_ref[i]) b.push_back(pdu_ref[i]);
    send(CMD_DATA, b);

    // excitation: algorithm #2 over channels 17..31; target: algorithm #1
    c = '{alg: HOP_CSA2, hop: 5, aa: 32'h71764129, map: '0, fixed: 0};
    for (int i = 17; i <= 31; i++) c.map[i] = 1'b1;
    set_exc(c);
    set_tgt('{alg: HOP_CSA1, hop: 7, aa: 32'h0, map: '1, fixed: 0});
    b = {}; send(CMD_START, b);
    hold(0, 10 * SPB);
    check("running after START", running, 1);

    set_cnt(0);                        step("counter 0");
    set_cnt(1);                        step("counter 1 (matching)");
    step("counter 2 (no command)");
    set_cnt(3, 1);                     step("counter 3 (corrupted command)");
    set_cnt(100);                      step("counter 100 (correction)");
    // sensor byte written by the tag into the payload
    @(negedge clk); tag_wr_en = 1; tag_wr_addr = 8'd5; tag_wr_data = 8'hC3;
    @(negedge clk); tag_wr_en = 0;
    pdu_ref[5] = 8'hC3; n_tag_writes++;
    set_cnt(101);                      step("counter 101 (tag data)");
    step("counter 102");

    // fixed channels: 2 MHz shift (post-divided), then a pair reused
    set_exc('{alg: HOP_FIXED, hop: 0, aa: 0, map: '1, fixed: 0});
    set_tgt('{alg: HOP_FIXED, hop: 0, aa: 0, map: '1, fixed: 1});
    step("fixed 0 -> 1");
    set_tgt('{alg: HOP_FIXED, hop: 0, aa: 0, map: '1, fixed: 38});
    step("fixed 0 -> 38");
    step("fixed 0 -> 38 again");
    set_tgt('{alg: HOP_FIXED, hop: 0, aa: 0, map: '1, fixed: 0});
    step("fixed 0 -> 0 (no shift)");

    // channel optimisation: target restricted to channels 0..7 by USED_MAP
    set_tgt('{alg: HOP_CSA1, hop: 9, aa: 0, map: '1, fixed: 0});
    tgt_c.map = 37'hFF;
    send(CMD_USED_MAP, {8'hFF, 8'h00, 8'h00, 8'h00, 8'h00});
    tgt_n = 0;
    for (int i = 0; i < 3; i++) begin
      check("restricted target channel", tgt_ch <= 7, 1);
      step("restricted map");
    end

    // channel scan of the target: channels 0, 1, 2 against excitation 0
    set_exc('{alg: HOP_FIXED, hop: 0, aa: 0, map: '1, fixed: 0});
    set_tgt('{alg: HOP_SCAN, hop: 0, aa: 0, map: '1, fixed: 0});
    for (int i = 0; i < 3; i++) step("scan");

    b = {}; send(CMD_STOP, b);
    hold(0, 10 * SPB);
    check("stopped", running, 0);
    excite_and_check("after STOP", 0);

    // totals and mechanisms
    check("DRP handshake violations", access_errors, 0);
    checks++;
    if (t_load <= 0 || t_load > 13000.0) begin
      failures++; $display("FAIL DRP loading took %f ns", t_load);
    end
    check("frames accepted", n_frame_ok, n_frames_sent - 1);
    begin
      string names[16] = '{"frame_ok", "frame_err", "counter load", "correction", "self increment",
                           "clock reload", "clock reuse", "packet", "no-shift", "fixed hopping",
                           "algorithm #1", "algorithm #2", "channel scan", "post-divided clock",
                           "tag data write", "stop"};
      int counts[16];
      counts = '{n_frame_ok, n_frame_err, n_loads, n_corrections, n_self_inc, n_reloads, n_reuse,
                 n_packets, n_no_shift, n_mode[HOP_FIXED], n_mode[HOP_CSA1], n_mode[HOP_CSA2],
                 n_mode[HOP_SCAN], n_post, n_tag_writes, n_stopped};
      foreach (counts[i]) begin
        $display("mechanism %-20s %0d", names[i], counts[i]);
        checks++;
        if (counts[i] == 0) begin
          failures++; $display("FAIL mechanism %s never happened", names[i]);
        end
      end
    end
    $display("packets with bits checked: %0d, DRP load %0.1f ns", n_bits_checked, t_load);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
