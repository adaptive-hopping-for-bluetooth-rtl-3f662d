// tb_dl_deframer: feeds framed, corrupted and aborted commands as bits.
//
// Frames are built by the edge model (sync, stuffing, CRC-8) with random
// types and payload lengths 0..32 and separated by random idle bits. Each
// good frame must give exactly one frame_ok with its type, length and
// payload; a frame with one bit flipped must give frame_err and no
// frame_ok; a length above 32 must give frame_err; a frame cut by `abort`
// must give neither.
`timescale 1ns/1ps
module tb_dl_deframer;
  import cd_pkg::*;
  import tb_edge_pkg::*;
  logic clk = 0, rst_n = 0, bit_valid = 0, bit_in = 0, abort = 0;
  logic frame_ok, frame_err;
  logic [7:0] frame_type, frame_len;
  logic [MAX_PAYLOAD-1:0][7:0] frame_payload;
  int checks = 0, failures = 0;
  int n_ok = 0, n_err = 0;

  dl_deframer dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (frame_ok) n_ok++;
    if (frame_err) n_err++;
  end

  initial begin
    repeat (500000) @(posedge clk);
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

  task automatic send(input bitq_t q);
    foreach (q[i]) begin
      @(negedge clk); bit_valid = 1; bit_in = q[i];
      @(negedge clk); bit_valid = 0;
    end
  endtask

  task automatic idle(input int n);
    bitq_t q;
    for (int i = 0; i < n; i++) q.push_back(i % 3 == 0);
    send(q);
  endtask

  bitq_t q;
  byteq_t pl;
  byte unsigned ty;
  int ok0, err0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    idle(20);
    for (int t = 0; t < 40; t++) begin
      pl.delete();
      ty = byte'($urandom);
      for (int i = 0, n = (t == 0) ? 0 : (t == 1 ? 32 : $urandom % 33); i < n; i++)
        pl.push_back((t % 4 == 0) ? 8'hFF : byte'($urandom));
      q = frame_bits(ty, pl);
      ok0 = n_ok; err0 = n_err;
      send(q);
      repeat (3) @(negedge clk);
      check("frame_ok", n_ok - ok0, 1);
      check("no frame_err", n_err - err0, 0);
      check("type", int'(frame_type), int'(ty));
      check("len", int'(frame_len), pl.size());
      foreach (pl[i]) check("payload", int'(frame_payload[i]), int'(pl[i]));
      idle($urandom % 20);
      // corrupted copy: flip one data bit (not inside the sync word)
      q[16 + $urandom % (q.size() - 16)] ^= 1'b1;
      ok0 = n_ok; err0 = n_err;
      send(q);
      idle(40);
      check("corrupted frame not accepted", n_ok - ok0, 0);
    end
    // length above the maximum
    pl.delete();
    for (int i = 0; i < 33; i++) pl.push_back(byte'(i));
    ok0 = n_ok; err0 = n_err;
    send(frame_bits(8'h08, pl));
    idle(20);
    check("too long rejected", n_ok - ok0, 0);
    check("too long flagged", (n_err - err0) >= 1, 1);
    // aborted frame
    pl.delete(); pl.push_back(8'h12); pl.push_back(8'h34);
    q = frame_bits(8'h03, pl);
    ok0 = n_ok; err0 = n_err;
    for (int i = 0; i < 24; i++) begin
      @(negedge clk); bit_valid = 1; bit_in = q[i];
      @(negedge clk); bit_valid = 0;
    end
    @(negedge clk); abort = 1; @(negedge clk); abort = 0;
    send(q[24:$]);
    idle(10);
    check("aborted frame dropped", n_ok - ok0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
