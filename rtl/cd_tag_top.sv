// cd_tag_top: FPGA logic of the adaptive-hopping BLE backscatter tag.
//
// The tag reflects BLE excitation packets sent by an edge device and moves
// them to a target channel of its choice by toggling an RF switch at the
// frequency difference of the two channels. Before each excitation the edge
// tells the tag, over an ASK downlink, which packet comes next (or which
// fixed channel it uses); the tag predicts the excitor's channel with the
// same BLE channel selection algorithm the excitor runs, picks its own target
// channel with its own hopping sequence and used map, reloads the MMCM with
// the precomputed clock state of that channel pair, and backscatters a BLE
// packet whitened for the target channel when the carrier arrives.
//
// Datapath, in order:
//   ADC samples -> ask_demod (bits, carrier) -> dl_deframer (checked
//   frames) -> cmd_regs (configuration, counter, PDU buffer) -> tag_ctrl,
//   which drives two hop_select units (excitation and target channel),
//   clk_state_table (state[exc][tgt] and the DRP words), drp_reconfig (MMCM
//   DRP port) and, per carrier, ble_pkt_gen -> phase_mod -> rf_switch.
//
// External parts connect through ports: the ADC (sample bus with a valid
// strobe), the MMCM (DRP port, reset, lock and its four phase clocks) and
// the RF switch. All logic runs on `clk` (100 MHz by default) except the
// fabric post-divider in phase_mod, which runs on the MMCM's 0-degree clock.
module cd_tag_top
  import cd_pkg::*;
#(
  parameter int unsigned SAMPLES_PER_BIT = 50,
  parameter int unsigned CARRIER_BITS    = 8,
  parameter int unsigned CLKS_PER_SYM    = 100
) (
  input  logic        clk,
  input  logic        rst_n,
  // envelope ADC
  input  logic        adc_valid,
  input  logic [11:0] adc_sample,
  // tag sensor data into the PDU buffer
  input  logic        tag_wr_en,
  input  logic [7:0]  tag_wr_addr,
  input  logic [7:0]  tag_wr_data,
  // MMCM
  output logic        mmcm_den,
  output logic        mmcm_dwe,
  output logic [6:0]  mmcm_daddr,
  output logic [15:0] mmcm_di,
  input  logic [15:0] mmcm_do,
  input  logic        mmcm_drdy,
  output logic        mmcm_rst,
  input  logic        mmcm_locked,
  input  logic [3:0]  mmcm_clk_ph,
  // RF switch
  output logic        rf_switch,
  // status
  output logic        running,
  output logic        carrier,
  output ch_idx_t     exc_ch,
  output ch_idx_t     tgt_ch,
  output state_idx_t  loaded_state,
  output logic        frame_ok,
  output logic        frame_err,
  output logic [15:0] n_loads,
  output logic [15:0] n_corrections,
  output logic [15:0] n_self_inc,
  output logic [15:0] n_reloads,
  output logic [15:0] n_reuse,
  output logic [15:0] n_packets,
  output logic [15:0] n_no_shift
);
  // downlink
  logic                          level, bit_valid, bit_val;
  logic [7:0]                    frame_type, frame_len;
  logic [MAX_PAYLOAD-1:0][7:0]   frame_payload;
  // configuration
  hop_cfg_t                      exc_cfg, tgt_cfg;
  logic                          exc_cnt_load, cfg_changed;
  logic [15:0]                   exc_cnt_value;
  logic [31:0]                   link_aa;
  logic [23:0]                   link_crc_init;
  logic [MAX_PDU-1:0][7:0]       pdu;
  // hopping and clocks
  logic                          hop_start, exc_valid, tgt_valid;
  logic [15:0]                   exc_counter, tgt_counter;
  state_idx_t                    pair_state, cfg_state, rom_state;
  logic [1:0]                    pair_post, post_q;
  logic [4:0]                    rom_word;
  drp_word_t                     rom_data;
  logic                          cfg_start, cfg_done, cfg_busy;
  // uplink
  logic                          pkt_start, pkt_done, pkt_busy, sym_valid, pkt_bit, mod_enable;
  logic                          phase_pi;

  ask_demod #(.SAMPLES_PER_BIT(SAMPLES_PER_BIT), .CARRIER_BITS(CARRIER_BITS)) u_demod (
    .clk, .rst_n, .sample_valid(adc_valid), .sample(adc_sample),
    .level, .bit_valid, .bit_out(bit_val), .carrier);

  dl_deframer u_deframer (
    .clk, .rst_n, .bit_valid, .bit_in(bit_val), .abort(carrier),
    .frame_ok, .frame_err, .frame_type, .frame_len, .frame_payload);

  cmd_regs u_regs (
    .clk, .rst_n, .frame_ok, .frame_type, .frame_len, .frame_payload,
    .tag_wr_en, .tag_wr_addr, .tag_wr_data,
    .run(running), .exc_cfg, .tgt_cfg, .exc_cnt_load, .exc_cnt_value, .cfg_changed,
    .link_aa, .link_crc_init, .pdu);

  hop_select u_exc_hop (
    .clk, .rst_n, .start(hop_start), .cfg(exc_cfg), .counter(exc_counter),
    .valid(exc_valid), .channel(exc_ch));

  hop_select u_tgt_hop (
    .clk, .rst_n, .start(hop_start), .cfg(tgt_cfg), .counter(tgt_counter),
    .valid(tgt_valid), .channel(tgt_ch));

  clk_state_table u_states (
    .clk, .exc_ch, .tgt_ch, .state(pair_state), .post_log2(pair_post),
    .rd_state(rom_state), .rd_word(rom_word), .rd_data(rom_data));

  drp_reconfig u_loader (
    .clk, .rst_n, .start(cfg_start), .state(cfg_state), .busy(cfg_busy), .done(cfg_done),
    .rom_state, .rom_word, .rom_data,
    .den(mmcm_den), .dwe(mmcm_dwe), .daddr(mmcm_daddr), .di(mmcm_di),
    .do_i(mmcm_do), .drdy(mmcm_drdy), .mmcm_rst, .locked(mmcm_locked));

  tag_ctrl u_ctrl (
    .clk, .rst_n, .run(running), .exc_cnt_load, .exc_cnt_value, .cfg_changed, .carrier,
    .hop_start, .exc_counter, .tgt_counter, .hop_valid(exc_valid & tgt_valid),
    .pair_state, .cfg_start, .cfg_state, .cfg_done, .loaded_state,
    .pkt_start, .pkt_done, .mod_enable,
    .n_loads, .n_corrections, .n_self_inc, .n_reloads, .n_reuse, .n_packets, .n_no_shift);

  // post-divide of the state being loaded
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         post_q <= '0;
    else if (cfg_start) post_q <= pair_post;
  end

  ble_pkt_gen #(.CLKS_PER_SYM(CLKS_PER_SYM)) u_pkt (
    .clk, .rst_n, .start(pkt_start), .aa(link_aa), .crc_init(link_crc_init),
    .channel(tgt_ch), .pdu, .busy(pkt_busy), .sym_valid, .bit_out(pkt_bit), .done(pkt_done));

  phase_mod u_mod (
    .clk, .rst_n, .enable(mod_enable), .sym_valid, .bit_in(pkt_bit),
    .clk_ph(mmcm_clk_ph), .post_log2(post_q), .phase_pi, .rf_switch);
endmodule
