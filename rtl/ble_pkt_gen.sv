// ble_pkt_gen: builds the BLE uplink packet bit by bit ("bit processing").
//
// The tag regenerates a complete BLE 1M PHY packet on the excitation tone:
//   preamble (8) | access address (32) | PDU (2-byte header + payload) | CRC (24)
// all sent least significant bit first. The preamble is 0xAA or 0x55 so that
// it alternates into the first access-address bit. The CRC-24 (polynomial
// x^24+x^10+x^9+x^6+x^4+x^3+x+1) runs over the PDU; it is kept in the
// LSB-first (reflected) form: the register starts at the bit-reversed CRC
// initial value, each PDU bit XORed with bit 0 decides whether the shifted
// register takes feedback 0x5A6000 with bit 23 set, and the register is then
// sent from bit 0 to bit 23. PDU and CRC are whitened with the 7-bit LFSR
// x^7+x^4+1, seeded with 0x40 | channel, where the channel is the target
// channel the packet will be received on.
//
// Interface: `start` latches nothing: aa, crc_init, channel and the PDU
// buffer must hold still while busy. The PDU length is 2 + pdu[1] (the
// header's length byte), capped at PDU_LEN. One bit per CLKS_PER_SYM cycles
// (1 Mbit/s at the default 100 MHz clock): sym_valid pulses on the first
// cycle of each symbol, bit_out holds the symbol's value. `done` pulses one
// cycle after the last symbol ends.
//
// Follows the paper: the tag appends a 3-byte CRC and whitens with the
// target channel's seed. The CRC and whitening bit orders follow the common
// LSB-first register form of the Bluetooth Core specification.
module ble_pkt_gen
  import cd_pkg::*;
#(
  parameter int unsigned PDU_LEN      = MAX_PDU,
  parameter int unsigned CLKS_PER_SYM = 100
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [31:0]              aa,
  input  logic [23:0]              crc_init,
  input  ch_idx_t                  channel,
  input  logic [PDU_LEN-1:0][7:0]  pdu,
  output logic                     busy,
  output logic                     sym_valid,
  output logic                     bit_out,
  output logic                     done
);
  localparam int unsigned SW = $clog2(CLKS_PER_SYM + 1);

  typedef enum logic [2:0] {S_IDLE, S_PRE, S_AA, S_PDU, S_CRC, S_END} state_e;

  state_e      st;
  logic [SW-1:0] sym_cnt;
  logic [8:0]  bit_idx;     // bit within the current field
  logic [8:0]  pdu_bits;
  logic [23:0] crc;
  logic [6:0]  wh;
  logic [7:0]  preamble;
  logic        pdu_bit;
  logic        wh_bit;

  function automatic logic [23:0] rev24(input logic [23:0] x);
    logic [23:0] r;
    for (int i = 0; i < 24; i++) r[i] = x[23 - i];
    return r;
  endfunction

  assign preamble = aa[0] ? 8'h55 : 8'hAA;
  assign pdu_bit  = pdu[bit_idx[8:3]][bit_idx[2:0]];
  assign wh_bit   = wh[0];
  assign busy     = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      sym_cnt   <= '0;
      bit_idx   <= '0;
      pdu_bits  <= '0;
      crc       <= '0;
      wh        <= '0;
      sym_valid <= 1'b0;
      bit_out   <= 1'b0;
      done      <= 1'b0;
    end else begin
      sym_valid <= 1'b0;
      done      <= 1'b0;
      if (st == S_IDLE) begin
        if (start) begin
          st       <= S_PRE;
          sym_cnt  <= '0;
          bit_idx  <= '0;
          crc      <= rev24(crc_init);
          wh       <= {1'b1, channel};
          pdu_bits <= (9'(pdu[1]) + 9'd2 > 9'(PDU_LEN)) ? 9'(PDU_LEN * 8)
                                                         : (9'(pdu[1]) + 9'd2) << 3;
        end
      end else if (sym_cnt != '0) begin
        sym_cnt <= sym_cnt - 1'b1;
      end else begin
        // first cycle of a symbol: emit it and advance
        sym_cnt   <= SW'(CLKS_PER_SYM - 1);
        sym_valid <= (st != S_END);
        bit_idx   <= bit_idx + 9'd1;
        unique case (st)
          S_PRE: begin
            bit_out <= preamble[bit_idx[2:0]];
            if (bit_idx == 9'd7) begin st <= S_AA; bit_idx <= '0; end
          end
          S_AA: begin
            bit_out <= aa[bit_idx[4:0]];
            if (bit_idx == 9'd31) begin st <= S_PDU; bit_idx <= '0; end
          end
          S_PDU: begin
            bit_out <= pdu_bit ^ wh_bit;
            wh      <= {wh[0], wh[6:4], wh[3] ^ wh[0], wh[2:1]};
            crc     <= (crc[0] ^ pdu_bit) ? ((crc >> 1) | 24'h800000) ^ 24'h5A6000 : crc >> 1;
            if (bit_idx == pdu_bits - 9'd1) begin st <= S_CRC; bit_idx <= '0; end
          end
          S_CRC: begin
            bit_out <= crc[bit_idx[4:0]] ^ wh_bit;
            wh      <= {wh[0], wh[6:4], wh[3] ^ wh[0], wh[2:1]};
            if (bit_idx == 9'd23) st <= S_END;
          end
          default: begin  // S_END: the last symbol has been on air for a full period
            st   <= S_IDLE;
            done <= 1'b1;
          end
        endcase
      end
    end
  end
endmodule
