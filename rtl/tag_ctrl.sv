// tag_ctrl: the tag's hopping sequencer.
//
// It walks the cycle the edge and the tag repeat for every excitation packet:
// idle until START; then for the current excitation packet counter it has
// both hop_select units compute a channel (the excitor's channel from the
// excitation configuration, the tag's target channel from the target
// configuration), looks up the clock state of that pair, reloads the MMCM if
// the state differs from the one loaded, and waits for the carrier. When the
// carrier comes it backscatters one packet (ble_pkt_gen and phase_mod run
// while `mod_enable` is high), then advances both counters by one and
// prepares the next packet at once.
//
// The edge's EXC_CNT command is authoritative: a counter that arrives while
// the tag waits is taken at once and the channels are recomputed; one that
// arrives while the tag is busy is kept and taken as soon as it is ready. A
// missed or corrupted command costs nothing, since the tag has already
// advanced the counter itself. A hopping configuration change restarts the
// target counter at 0 and recomputes. A pair that needs no shift (same
// frequency) cannot be backscattered: that carrier is let pass (no_shift).
//
// Event counters (16 bits, wrapping) report what happened: counter loads,
// loads that corrected the tag's own prediction, self increments, clock
// reloads, reloads skipped because the state was already loaded, packets
// sent and carriers let pass.
//
// Timing: channels 1 cycle after hop_start, clock state 1 cycle later,
// cfg_start 4 cycles after hop_start, then the reconfiguration time;
// pkt_start is the cycle after the carrier flag rises, and mod_enable stays
// high from then until the cycle after pkt_done.
//
// Follows the paper's Fig. 4 sequence (decoding, configuration, packet) and
// its counter rule (update on a checked command, otherwise increment). The
// pending-command handling and the event counters are this design's.
module tag_ctrl
  import cd_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // from cmd_regs
  input  logic        run,
  input  logic        exc_cnt_load,
  input  logic [15:0] exc_cnt_value,
  input  logic        cfg_changed,
  // from ask_demod
  input  logic        carrier,
  // hopping control
  output logic        hop_start,
  output logic [15:0] exc_counter,
  output logic [15:0] tgt_counter,
  input  logic        hop_valid,
  // clock state lookup and loader
  input  state_idx_t  pair_state,
  output logic        cfg_start,
  output state_idx_t  cfg_state,
  input  logic        cfg_done,
  output state_idx_t  loaded_state,
  // uplink
  output logic        pkt_start,
  input  logic        pkt_done,
  output logic        mod_enable,
  // event counters
  output logic [15:0] n_loads,
  output logic [15:0] n_corrections,
  output logic [15:0] n_self_inc,
  output logic [15:0] n_reloads,
  output logic [15:0] n_reuse,
  output logic [15:0] n_packets,
  output logic [15:0] n_no_shift
);
  typedef enum logic [2:0] {
    S_IDLE, S_COMPUTE, S_LOOKUP, S_DECIDE, S_CONFIG, S_READY, S_PACKET, S_SKIP
  } state_e;

  state_e      st;
  logic        carrier_q;
  logic        pend;
  logic [15:0] pend_value;
  logic        carrier_rise;

  assign carrier_rise = carrier & ~carrier_q;
  assign mod_enable   = (st == S_PACKET);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= S_IDLE;
      carrier_q     <= 1'b0;
      pend          <= 1'b0;
      pend_value    <= '0;
      hop_start     <= 1'b0;
      exc_counter   <= '0;
      tgt_counter   <= '0;
      cfg_start     <= 1'b0;
      cfg_state     <= '0;
      loaded_state  <= '0;
      pkt_start     <= 1'b0;
      n_loads       <= '0;
      n_corrections <= '0;
      n_self_inc    <= '0;
      n_reloads     <= '0;
      n_reuse       <= '0;
      n_packets     <= '0;
      n_no_shift    <= '0;
    end else begin
      carrier_q <= carrier;
      hop_start <= 1'b0;
      cfg_start <= 1'b0;
      pkt_start <= 1'b0;

      // keep a counter command that arrives while busy
      if (exc_cnt_load) begin
        pend       <= 1'b1;
        pend_value <= exc_cnt_value;
      end
      if (cfg_changed) tgt_counter <= '0;

      unique case (st)
        S_IDLE: begin
          if (run) begin
            hop_start <= 1'b1;
            st        <= S_COMPUTE;
          end
        end
        S_COMPUTE: if (hop_valid) st <= S_LOOKUP;
        S_LOOKUP:  st <= S_DECIDE;
        S_DECIDE: begin
          cfg_state <= pair_state;
          if (pair_state == '0) begin
            st <= S_READY;
          end else if (pair_state == loaded_state) begin
            n_reuse <= n_reuse + 16'd1;
            st      <= S_READY;
          end else begin
            cfg_start <= 1'b1;
            n_reloads <= n_reloads + 16'd1;
            st        <= S_CONFIG;
          end
        end
        S_CONFIG: if (cfg_done) begin
          loaded_state <= cfg_state;
          st           <= S_READY;
        end
        S_READY: begin
          if (!run) begin
            st <= S_IDLE;
          end else if (pend || exc_cnt_load || cfg_changed) begin
            if (pend || exc_cnt_load) begin
              exc_counter <= exc_cnt_load ? exc_cnt_value : pend_value;
              n_loads     <= n_loads + 16'd1;
              if ((exc_cnt_load ? exc_cnt_value : pend_value) != exc_counter)
                n_corrections <= n_corrections + 16'd1;
              pend <= 1'b0;
            end
            if (cfg_changed) tgt_counter <= '0;
            hop_start <= 1'b1;
            st        <= S_COMPUTE;
          end else if (carrier_rise) begin
            if (cfg_state == '0) begin
              n_no_shift <= n_no_shift + 16'd1;
              st         <= S_SKIP;
            end else begin
              pkt_start <= 1'b1;
              st        <= S_PACKET;
            end
          end
        end
        S_PACKET: if (pkt_done) begin
          n_packets <= n_packets + 16'd1;
          st        <= S_SKIP;
        end
        default: begin  // S_SKIP: let the carrier end, then move to the next packet
          if (!carrier) begin
            exc_counter <= exc_counter + 16'd1;
            tgt_counter <= cfg_changed ? 16'd0 : tgt_counter + 16'd1;
            n_self_inc  <= n_self_inc + 16'd1;
            hop_start   <= 1'b1;
            st          <= S_COMPUTE;
          end
        end
      endcase
    end
  end
endmodule
