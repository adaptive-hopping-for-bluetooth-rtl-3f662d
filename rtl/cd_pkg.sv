// cd_pkg: types and constants shared by the adaptive-hopping backscatter tag.
//
// The tag moves a BLE excitation tone to another BLE channel by toggling its RF
// switch with a square-wave clock whose frequency equals the distance between
// the two channels. Channels sit on a 2 MHz grid, so 39 clock frequencies
// (2, 4, ... 78 MHz) cover every (excitation, target) pair thanks to double
// sideband modulation: each frequency is one "clock state". This package holds
// the BLE channel-to-frequency mapping, the downlink command codes, the MMCM
// factors of the 39 clock states and the encoding of the MMCM dynamic
// reconfiguration (DRP) words those states are stored as.
//
// From the paper: 40 channels, 39 states, CLK0 = (CLK_INPUT*MUL/DIV)/CLK0_DIVIDE,
// a state of 9 + 2n words of 39 bits with n = 4 clocks. Design choices: a
// 100 MHz reference, the factor values below (found by an exhaustive search of
// the 7-series MMCM ranges, VCO 600..1200 MHz, PFD >= 10 MHz), a fabric
// post-divider for the 2 and 4 MHz states that the MMCM cannot reach with its
// 128 maximum output divide, the command codes and the lock/filter words.
package cd_pkg;

  localparam int unsigned NUM_CH      = 40;  // BLE channels 0..39
  localparam int unsigned NUM_DATA_CH = 37;  // data channels 0..36
  localparam int unsigned NUM_STATES  = 39;  // clock states, shift 2k MHz, k = 1..39
  localparam int unsigned NUM_CLKS    = 4;   // output clocks per state (n)
  localparam int unsigned DRP_WORDS   = 9 + 2 * NUM_CLKS;  // 17 words per state
  localparam int unsigned MAX_PAYLOAD = 32;  // largest downlink payload, bytes
  localparam int unsigned MAX_PDU     = 39;  // largest PDU buffered for uplink, bytes

  typedef logic [5:0]  ch_idx_t;     // BLE channel index 0..39
  typedef logic [5:0]  state_idx_t;  // clock state 1..39, 0 = none
  typedef logic [36:0] chan_map_t;   // used map of the 37 data channels

  // Hopping algorithm selected for a channel sequence (Fig. 5 "Hopping control").
  typedef enum logic [1:0] {
    HOP_FIXED = 2'd0,  // self defined: one channel given by the edge
    HOP_CSA1  = 2'd1,  // BLE channel selection algorithm #1
    HOP_CSA2  = 2'd2,  // BLE channel selection algorithm #2
    HOP_SCAN  = 2'd3   // channel scan: channel index = counter mod 40
  } hop_alg_e;

  typedef struct packed {
    hop_alg_e    alg;
    logic [4:0]  hop;       // hop increment of algorithm #1 (5..16)
    logic [31:0] aa;        // access address used by algorithm #2
    chan_map_t   used_map;  // bit i set: data channel i is used
    ch_idx_t     fixed_ch;  // channel of HOP_FIXED
  } hop_cfg_t;

  // Downlink command types.
  typedef enum logic [7:0] {
    CMD_START    = 8'h01,  // start backscattering
    CMD_STOP     = 8'h02,  // back to idle
    CMD_EXC_CNT  = 8'h03,  // excitation packet counter, 2 bytes little endian
    CMD_EXC_CFG  = 8'h04,  // excitation hopping configuration, 12 bytes
    CMD_TGT_CFG  = 8'h05,  // target hopping configuration, 12 bytes
    CMD_USED_MAP = 8'h06,  // target used map, 5 bytes
    CMD_LINK_CFG = 8'h07,  // uplink access address (4) and CRC init (3)
    CMD_DATA     = 8'h08   // PDU bytes for the uplink packet
  } cmd_e;

  // One MMCM reconfiguration word (XAPP888 layout): 7-bit address,
  // 16-bit mask of the bits to keep, 16-bit new data: 39 bits.
  typedef struct packed {
    logic [6:0]  addr;
    logic [15:0] mask;
    logic [15:0] data;
  } drp_word_t;

  // MMCM factors of one clock state.
  typedef struct packed {
    logic [6:0] mul;       // MUL, CLKFBOUT multiply
    logic [3:0] div;       // DIV, DIVCLK divide
    logic [7:0] clk0_div;  // CLK0_DIVIDE, output divide
    logic [1:0] post_log2; // fabric post divide by 2**post_log2
  } clk_factors_t;

  // RF channel number (frequency 2402 + 2*rf MHz) of a BLE channel index.
  function automatic logic [5:0] rf_of_ch(input ch_idx_t ch);
    if (ch == 6'd37)      return 6'd0;
    else if (ch <= 6'd10) return ch + 6'd1;
    else if (ch == 6'd38) return 6'd12;
    else if (ch <= 6'd36) return ch + 6'd2;
    else                  return 6'd39;
  endfunction

  // Clock state for shifting excitation channel exc to target channel tgt:
  // the channel distance in 2 MHz steps, 0 if the pair is not a shift.
  function automatic state_idx_t state_of_pair(input ch_idx_t exc, input ch_idx_t tgt);
    logic [5:0] re, rt;
    if (exc > 6'd39 || tgt > 6'd39) return '0;
    re = rf_of_ch(exc);
    rt = rf_of_ch(tgt);
    return (re > rt) ? re - rt : rt - re;
  endfunction

  // Factors of state k: modulation clock 2k MHz from a 100 MHz reference,
  // f = 100 * MUL / DIV / CLK0_DIVIDE / 2**post_log2 (all exact).
  function automatic clk_factors_t factors_of_state(input state_idx_t k);
    clk_factors_t f;
    case (k)
      6'd1:  f = '{7'd10, 4'd1, 8'd125, 2'd2};
      6'd2:  f = '{7'd10, 4'd1, 8'd125, 2'd1};
      6'd3:  f = '{7'd6,  4'd1, 8'd100, 2'd0};
      6'd4:  f = '{7'd10, 4'd1, 8'd125, 2'd0};
      6'd5:  f = '{7'd12, 4'd1, 8'd120, 2'd0};
      6'd6:  f = '{7'd12, 4'd1, 8'd100, 2'd0};
      6'd7:  f = '{7'd7,  4'd1, 8'd50,  2'd0};
      6'd8:  f = '{7'd12, 4'd1, 8'd75,  2'd0};
      6'd9:  f = '{7'd9,  4'd1, 8'd50,  2'd0};
      6'd10: f = '{7'd12, 4'd1, 8'd60,  2'd0};
      6'd11: f = '{7'd11, 4'd1, 8'd50,  2'd0};
      6'd12: f = '{7'd12, 4'd1, 8'd50,  2'd0};
      6'd13: f = '{7'd13, 4'd2, 8'd25,  2'd0};
      6'd14: f = '{7'd7,  4'd1, 8'd25,  2'd0};
      6'd15: f = '{7'd12, 4'd1, 8'd40,  2'd0};
      6'd16: f = '{7'd8,  4'd1, 8'd25,  2'd0};
      6'd17: f = '{7'd17, 4'd2, 8'd25,  2'd0};
      6'd18: f = '{7'd9,  4'd1, 8'd25,  2'd0};
      6'd19: f = '{7'd19, 4'd2, 8'd25,  2'd0};
      6'd20: f = '{7'd12, 4'd1, 8'd30,  2'd0};
      6'd21: f = '{7'd21, 4'd2, 8'd25,  2'd0};
      6'd22: f = '{7'd11, 4'd1, 8'd25,  2'd0};
      6'd23: f = '{7'd23, 4'd2, 8'd25,  2'd0};
      6'd24: f = '{7'd12, 4'd1, 8'd25,  2'd0};
      6'd25: f = '{7'd12, 4'd1, 8'd24,  2'd0};
      6'd26: f = '{7'd52, 4'd5, 8'd20,  2'd0};
      6'd27: f = '{7'd54, 4'd5, 8'd20,  2'd0};
      6'd28: f = '{7'd56, 4'd5, 8'd20,  2'd0};
      6'd29: f = '{7'd58, 4'd5, 8'd20,  2'd0};
      6'd30: f = '{7'd12, 4'd1, 8'd20,  2'd0};
      6'd31: f = '{7'd31, 4'd5, 8'd10,  2'd0};
      6'd32: f = '{7'd48, 4'd5, 8'd15,  2'd0};
      6'd33: f = '{7'd33, 4'd5, 8'd10,  2'd0};
      6'd34: f = '{7'd51, 4'd5, 8'd15,  2'd0};
      6'd35: f = '{7'd7,  4'd1, 8'd10,  2'd0};
      6'd36: f = '{7'd54, 4'd5, 8'd15,  2'd0};
      6'd37: f = '{7'd37, 4'd5, 8'd10,  2'd0};
      6'd38: f = '{7'd57, 4'd5, 8'd15,  2'd0};
      6'd39: f = '{7'd39, 4'd5, 8'd10,  2'd0};
      default: f = '{7'd10, 4'd1, 8'd10, 2'd0};
    endcase
    return f;
  endfunction

  // Counter register 1 of an MMCM divider (XAPP888): phase mux [15:13],
  // high time [11:6], low time [5:0]. A divide of 1 uses no_count in reg 2.
  function automatic logic [15:0] cnt_reg1(input logic [7:0] div, input logic [2:0] phase_mux);
    logic [7:0] hi, lo;
    hi = div >> 1;
    lo = div - hi;
    if (div == 8'd1) begin hi = 8'd1; lo = 8'd1; end
    return {phase_mux, 1'b0, hi[5:0], lo[5:0]};
  endfunction

  // Counter register 2: mx [9:8] = 0, edge [7] for odd divides,
  // no_count [6] for a divide of 1, delay time [5:0] in VCO cycles.
  function automatic logic [15:0] cnt_reg2(input logic [7:0] div, input logic [5:0] delay);
    return {6'b0, 2'b00, div[0] & (div != 8'd1), div == 8'd1, delay};
  endfunction

  // Phase offset of output clock ph (ph * 90 degrees) of a divide-by-div
  // counter, in 1/8 VCO cycles. The DRP delay field holds at most 63 whole
  // cycles, so the offset saturates there: 0 and 180 degrees, the phases the
  // modulator uses, always fit (divide <= 127); 90 and 270 degrees are exact
  // for divides up to 84.
  function automatic logic [8:0] phase_eighths(input logic [7:0] div, input logic [1:0] ph);
    logic [11:0] e;
    e = 12'(div) * 12'(2 * ph);
    return (e > 12'd511) ? 9'd511 : e[8:0];
  endfunction

  // The 17 DRP words of clock state k, in load order: power, CLKOUT0..3
  // (phases 0, 90, 180, 270 degrees) registers 1 and 2, DIVCLK, CLKFBOUT
  // registers 1 and 2, three lock registers and two filter registers.
  function automatic drp_word_t drp_word_of_state(input state_idx_t k, input logic [4:0] w);
    clk_factors_t f;
    logic [1:0]   ph;
    logic [8:0]   e;
    logic [15:0]  r;
    drp_word_t    d;
    f  = factors_of_state(k);
    ph = 2'((w - 5'd1) >> 1);
    e  = phase_eighths(f.clk0_div, ph);
    case (w)
      5'd0: d = '{7'h28, 16'h0000, 16'hFFFF};                                   // power
      5'd1, 5'd3, 5'd5, 5'd7:
        d = '{7'h08 + 7'(2 * ph), 16'h1000, cnt_reg1(f.clk0_div, e[2:0])};     // CLKOUTx reg 1
      5'd2, 5'd4, 5'd6, 5'd8:
        d = '{7'h09 + 7'(2 * ph), 16'hFC00, cnt_reg2(f.clk0_div, e[8:3])};     // CLKOUTx reg 2
      5'd9: begin                                                              // DIVCLK
        r = cnt_reg1({4'b0, f.div}, 3'd0);
        d = '{7'h16, 16'hC000, {2'b00, f.div[0] & (f.div != 4'd1), f.div == 4'd1, r[11:0]}};
      end
      5'd10: d = '{7'h14, 16'h1000, cnt_reg1({1'b0, f.mul}, 3'd0)};             // CLKFBOUT reg 1
      5'd11: d = '{7'h15, 16'hFC00, cnt_reg2({1'b0, f.mul}, 6'd0)};             // CLKFBOUT reg 2
      5'd12: d = '{7'h18, 16'hFC00, 16'h03E8};                                  // lock count
      5'd13: d = '{7'h19, 16'h8000, {1'b0, 5'd1, 10'h3E8}};                     // unlock, ref delay
      5'd14: d = '{7'h1A, 16'h8000, {1'b0, 5'd31, 10'h3E9}};                    // fb delay, sat high
      5'd15: d = '{7'h4E, 16'h66FF, 16'h9000};                                  // filter reg 1
      default: d = '{7'h4F, 16'h666F, 16'h9000};                                // filter reg 2
    endcase
    return d;
  endfunction

  // CRC-8 (x^8 + x^2 + x + 1, initial 0) step of the downlink, MSB first.
  function automatic logic [7:0] crc8_byte(input logic [7:0] crc, input logic [7:0] b);
    logic [7:0] c;
    c = crc ^ b;
    for (int i = 0; i < 8; i++) c = c[7] ? ((c << 1) ^ 8'h07) : (c << 1);
    return c;
  endfunction

endpackage
