// cmd_regs: turns checked downlink commands into the tag's configuration.
//
// Every command the edge sends lands here as a checked frame (type, length,
// payload). The block keeps what the rest of the tag works from:
//   - run: set by START, cleared by STOP;
//   - the excitation hopping configuration (how the excitor picks its
//     channel: one fixed channel, or BLE algorithm #1/#2 with its hop,
//     access address and channel map) and the excitation packet counter,
//     which a EXC_CNT command loads (exc_cnt_load pulses with the value);
//   - the target hopping configuration the tag itself hops with, and its
//     used channel map, which USED_MAP replaces after the edge has scanned
//     the channels' quality;
//   - the uplink access address and CRC initial value (LINK_CFG);
//   - the PDU buffer of the packet to backscatter: DATA writes edge data
//     (payload byte 0 is the start offset), and the tag's own sensor data
//     enters through the tag_wr port, one byte per cycle (DATA wins a clash
//     on the same cycle).
// Multi-byte fields are little endian. A command shorter than its fields is
// ignored. cfg_changed pulses when either hopping configuration or the used
// map changes.
//
// Timing: registers update the cycle after frame_ok.
//
// The paper says the edge sends start, excitation channel or packet counter,
// the used map, the hopping parameters (hop interval, access address) and
// ambient BLE data; the command codes and layouts are this design's.
module cmd_regs
  import cd_pkg::*;
#(
  parameter int unsigned MAX_LEN = MAX_PAYLOAD,
  parameter int unsigned PDU_LEN = MAX_PDU
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     frame_ok,
  input  logic [7:0]               frame_type,
  input  logic [7:0]               frame_len,
  input  logic [MAX_LEN-1:0][7:0]  frame_payload,
  input  logic                     tag_wr_en,
  input  logic [7:0]               tag_wr_addr,
  input  logic [7:0]               tag_wr_data,
  output logic                     run,
  output hop_cfg_t                 exc_cfg,
  output hop_cfg_t                 tgt_cfg,
  output logic                     exc_cnt_load,
  output logic [15:0]              exc_cnt_value,
  output logic                     cfg_changed,
  output logic [31:0]              link_aa,
  output logic [23:0]              link_crc_init,
  output logic [PDU_LEN-1:0][7:0]  pdu
);
  // Decode the 12-byte hopping configuration layout:
  // [0] algorithm, [1] hop, [2..5] access address, [6..10] used map, [11] fixed channel
  function automatic hop_cfg_t cfg_of(input logic [MAX_LEN-1:0][7:0] p);
    hop_cfg_t c;
    c.alg      = hop_alg_e'(p[0][1:0]);
    c.hop      = p[1][4:0];
    c.aa       = {p[5], p[4], p[3], p[2]};
    c.used_map = {p[10][4:0], p[9], p[8], p[7], p[6]};
    c.fixed_ch = p[11][5:0];
    return c;
  endfunction

  localparam chan_map_t ALL_USED = '1;
  localparam hop_cfg_t  CFG_RESET = '{alg: HOP_FIXED, hop: 5'd5, aa: 32'h8E89BED6,
                                      used_map: ALL_USED, fixed_ch: 6'd37};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run           <= 1'b0;
      exc_cfg       <= CFG_RESET;
      tgt_cfg       <= CFG_RESET;
      exc_cnt_load  <= 1'b0;
      exc_cnt_value <= '0;
      cfg_changed   <= 1'b0;
      link_aa       <= 32'h8E89BED6;  // advertising access address
      link_crc_init <= 24'h555555;    // advertising CRC initial value
      pdu           <= '0;
    end else begin
      exc_cnt_load <= 1'b0;
      cfg_changed  <= 1'b0;
      if (tag_wr_en && tag_wr_addr < 8'(PDU_LEN)) pdu[tag_wr_addr] <= tag_wr_data;
      if (frame_ok) begin
        case (frame_type)
          CMD_START: run <= 1'b1;
          CMD_STOP:  run <= 1'b0;
          CMD_EXC_CNT: if (frame_len >= 8'd2) begin
            exc_cnt_load  <= 1'b1;
            exc_cnt_value <= {frame_payload[1], frame_payload[0]};
          end
          CMD_EXC_CFG: if (frame_len >= 8'd12) begin
            exc_cfg     <= cfg_of(frame_payload);
            cfg_changed <= 1'b1;
          end
          CMD_TGT_CFG: if (frame_len >= 8'd12) begin
            tgt_cfg     <= cfg_of(frame_payload);
            cfg_changed <= 1'b1;
          end
          CMD_USED_MAP: if (frame_len >= 8'd5) begin
            tgt_cfg.used_map <= {frame_payload[4][4:0], frame_payload[3], frame_payload[2],
                                 frame_payload[1], frame_payload[0]};
            cfg_changed      <= 1'b1;
          end
          CMD_LINK_CFG: if (frame_len >= 8'd7) begin
            link_aa       <= {frame_payload[3], frame_payload[2], frame_payload[1], frame_payload[0]};
            link_crc_init <= {frame_payload[6], frame_payload[5], frame_payload[4]};
          end
          CMD_DATA: if (frame_len >= 8'd1) begin
            for (int i = 1; i < MAX_LEN; i++)
              if (i < int'(frame_len) && int'(frame_payload[0]) + i - 1 < PDU_LEN)
                pdu[int'(frame_payload[0]) + i - 1] <= frame_payload[i];
          end
          default: ;
        endcase
      end
    end
  end
endmodule
