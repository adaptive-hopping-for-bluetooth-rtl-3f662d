// tb_edge_pkg: what the testbenches need of the edge device's downlink.
//
// Builds the bit sequence of a downlink command frame the way the edge
// sends it: the 16-bit sync word 0xD391, then TYPE, LEN, PAYLOAD and the
// CRC-8 (x^8+x^2+x+1, initial 0, bitwise here) most significant bit first,
// with the opposite bit stuffed after every five equal bits after the sync word.
//
// It also holds reference models written from the Bluetooth Core
// specification, independent of the RTL: both channel selection algorithms,
// the channel-index-to-RF-channel map, and the on-air bits of a BLE packet
// (MSB-first CRC register preset with the CRC initial value, whitening
// register with position 0 set and the channel in positions 1..6).
package tb_edge_pkg;
  typedef bit bitq_t[$];
  typedef byte unsigned byteq_t[$];

  function automatic byte unsigned crc8(input byteq_t data);
    byte unsigned c = 0;
    foreach (data[i])
      for (int b = 7; b >= 0; b--) begin
        bit fb = c[7] ^ data[i][b];
        c = c << 1;
        if (fb) c = c ^ 8'h07;
      end
    return c;
  endfunction

  // bad_crc sends the frame with its CRC byte inverted in bit 0
  function automatic bitq_t frame_bits(input byte unsigned ftype, input byteq_t payload,
                                       input bit bad_crc = 0);
    bitq_t q;
    byteq_t body;
    int run = 0;
    bit last = 0;
    for (int i = 15; i >= 0; i--) q.push_back(16'hD391 >> i);
    body.push_back(ftype);
    body.push_back(byte'(payload.size()));
    foreach (payload[i]) body.push_back(payload[i]);
    body.push_back(crc8(body) ^ byte'(bad_crc));
    foreach (body[i])
      for (int b = 7; b >= 0; b--) begin
        q.push_back(body[i][b]);
        run = (run > 0 && body[i][b] == last) ? run + 1 : 1;
        last = body[i][b];
        if (run == 5) begin q.push_back(!last); last = !last; run = 1; end
      end
    return q;
  endfunction

  // RF channel (2402 + 2*rf MHz) of BLE channel index ch
  function automatic int rf_of(input int ch);
    if (ch == 37) return 0;
    if (ch == 38) return 12;
    if (ch == 39) return 39;
    return (ch <= 10) ? ch + 1 : ch + 2;
  endfunction

  function automatic int remap(input int unmapped, input int idx_num, input logic [36:0] m);
    int tbl[$];
    for (int c = 0; c < 37; c++) if (m[c]) tbl.push_back(c);
    if (m[unmapped]) return unmapped;
    return tbl[idx_num];
  endfunction

  // algorithm #1: the channel of connection event n, walking from channel 0
  function automatic int ref_csa1(input int n, input int hop, input logic [36:0] m);
    int u = 0, cnt = 0;
    for (int i = 0; i <= n; i++) u = (u + hop) % 37;
    for (int c = 0; c < 37; c++) cnt += m[c];
    return remap(u, u % cnt, m);
  endfunction

  function automatic logic [15:0] rev8x2(input logic [15:0] a);
    logic [15:0] r = '0;
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < 8; i++) r[b*8 + 7 - i] = a[b*8 + i];
    return r;
  endfunction

  // algorithm #2
  function automatic int ref_csa2(input int n, input logic [31:0] aa, input logic [36:0] m);
    int cid, u, prn, cnt = 0;
    cid = int'(aa[31:16] ^ aa[15:0]);
    u = n ^ cid;
    for (int r = 0; r < 3; r++) u = (int'(rev8x2(16'(u))) * 17 + cid) % 65536;
    prn = u ^ cid;
    for (int c = 0; c < 37; c++) cnt += m[c];
    return remap(prn % 37, (cnt * prn) / 65536, m);
  endfunction

  // on-air bits of a BLE 1M packet, in transmission order
  function automatic bitq_t ble_air_bits(input logic [31:0] aa, input logic [23:0] crc_init,
                                         input int channel, input byteq_t pdu);
    bitq_t q, pb;
    logic [23:0] r = crc_init;
    bit w[7], o, d;
    for (int i = 0; i < 8; i++) q.push_back(aa[0] ? (8'h55 >> i) & 1 : (8'hAA >> i) & 1);
    for (int i = 0; i < 32; i++) q.push_back(aa[i]);
    foreach (pdu[b])
      for (int i = 0; i < 8; i++) begin
        d = pdu[b][i];
        pb.push_back(d);
        o = r[23] ^ d;
        r = r << 1;
        if (o) r = r ^ 24'h00065B;
      end
    for (int i = 23; i >= 0; i--) pb.push_back(r[i]);
    w[0] = 1;
    for (int i = 1; i <= 6; i++) w[i] = (channel >> (6 - i)) & 1;
    foreach (pb[i]) begin
      o = w[6];
      q.push_back(pb[i] ^ o);
      for (int j = 6; j > 0; j--) w[j] = w[j - 1];
      w[0] = o;
      w[4] = w[4] ^ o;
    end
    return q;
  endfunction
endpackage
