// tb_cmd_regs: applies each downlink command and checks the registers.
//
// Checks the reset values (advertising access address and CRC init, all
// channels used), START/STOP, the counter load pulse, both hopping
// configurations with their field layout, USED_MAP, LINK_CFG, DATA at an
// offset, the tag's own byte writes, that short commands and frames without
// frame_ok change nothing, and the cfg_changed pulses.
`timescale 1ns/1ps
module tb_cmd_regs;
  import cd_pkg::*;
  logic clk = 0, rst_n = 0, frame_ok = 0;
  logic [7:0] frame_type = 0, frame_len = 0;
  logic [MAX_PAYLOAD-1:0][7:0] frame_payload = '0;
  logic tag_wr_en = 0;
  logic [7:0] tag_wr_addr = 0, tag_wr_data = 0;
  logic run, exc_cnt_load, cfg_changed;
  hop_cfg_t exc_cfg, tgt_cfg;
  logic [15:0] exc_cnt_value;
  logic [31:0] link_aa;
  logic [23:0] link_crc_init;
  logic [MAX_PDU-1:0][7:0] pdu;
  int checks = 0, failures = 0, n_changed = 0, n_load = 0;

  cmd_regs dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (cfg_changed) n_changed++;
    if (exc_cnt_load) n_load++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic cmd(input logic [7:0] t, input byte unsigned p[], input bit ok = 1);
    @(negedge clk);
    frame_type = t; frame_len = 8'(p.size()); frame_payload = '0;
    foreach (p[i]) frame_payload[i] = p[i];
    frame_ok = ok;
    @(negedge clk); frame_ok = 0;
    @(negedge clk);
  endtask

  byte unsigned cfgb[] = '{8'h02, 8'h09, 8'h78, 8'h56, 8'h34, 8'h12,
                           8'hAA, 8'h55, 8'hF0, 8'h0F, 8'h15, 8'd38};
  byte unsigned none[] = '{};

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check("reset run", run, 0);
    check("reset aa", link_aa, 32'h8E89BED6);
    check("reset crc", link_crc_init, 24'h555555);
    check("reset map", tgt_cfg.used_map, {37{1'b1}});
    cmd(CMD_START, none);
    check("start", run, 1);
    cmd(CMD_EXC_CNT, '{8'h34, 8'h12});
    check("counter value", exc_cnt_value, 16'h1234);
    check("counter loads", n_load, 1);
    cmd(CMD_EXC_CNT, '{8'h99});
    check("short counter ignored", n_load, 1);
    cmd(CMD_EXC_CFG, cfgb);
    check("exc alg", exc_cfg.alg, HOP_CSA2);
    check("exc hop", exc_cfg.hop, 9);
    check("exc aa", exc_cfg.aa, 32'h12345678);
    check("exc map", exc_cfg.used_map, 37'h15_0FF0_55AA);
    check("exc fixed", exc_cfg.fixed_ch, 38);
    cfgb[0] = 8'h01; cfgb[1] = 8'h0C;
    cmd(CMD_TGT_CFG, cfgb);
    check("tgt alg", tgt_cfg.alg, HOP_CSA1);
    check("tgt hop", tgt_cfg.hop, 12);
    check("cfg changed twice", n_changed, 2);
    cmd(CMD_USED_MAP, '{8'h01, 8'h02, 8'h03, 8'h04, 8'h1F});
    check("used map", tgt_cfg.used_map, 37'h1F_0403_0201);
    check("exc map kept", exc_cfg.used_map, 37'h15_0FF0_55AA);
    check("cfg changed three times", n_changed, 3);
    cmd(CMD_LINK_CFG, '{8'hD6, 8'hBE, 8'h89, 8'h51, 8'h11, 8'h22, 8'h33});
    check("link aa", link_aa, 32'h5189BED6);
    check("link crc", link_crc_init, 24'h332211);
    cmd(CMD_DATA, '{8'd3, 8'hA0, 8'hA1, 8'hA2});
    check("data 3", pdu[3], 8'hA0);
    check("data 5", pdu[5], 8'hA2);
    check("data 6 untouched", pdu[6], 8'h00);
    @(negedge clk); tag_wr_en = 1; tag_wr_addr = 8'd10; tag_wr_data = 8'h5C;
    @(negedge clk); tag_wr_en = 0;
    check("tag write", pdu[10], 8'h5C);
    cmd(CMD_STOP, none, 0);
    check("no frame_ok no stop", run, 1);
    cmd(CMD_STOP, none);
    check("stop", run, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
