// ask_demod: envelope-sample slicer for the tag's ASK downlink.
//
// The tag cannot demodulate frequency-modulated signals, so the edge sends
// its commands as on-off keying (ASK) that an envelope detector and an ADC
// turn into a stream of amplitude samples. This block slices those samples
// into bits and also tells a long unbroken "on" period, the constant-envelope
// BLE excitation tone, apart from downlink data.
//
// How it works: a peak tracker follows the "on" level and a valley tracker the
// "off" level of the envelope. Each moves at once to a sample beyond it and
// otherwise creeps towards samples on its own side of the threshold by
// 2**-DECAY_SHIFT of the gap per sample, so a long carrier or a long silence
// does not pull the other tracker along. The slicing
// threshold is their midpoint, and nothing is sliced as "on" while the swing
// between them is below MIN_SWING. Bit timing is recovered by a counter that
// is re-centred on every level change and samples the sliced level in the
// middle of each bit period of SAMPLES_PER_BIT samples. `carrier` is high once
// the level has been on for CARRIER_BITS bit periods, longer than any run of
// ones the bit-stuffed downlink can hold, and drops with the level.
//
// Interface: one sample per cycle with sample_valid high; bit_valid pulses
// once per recovered bit with bit_out. Timing: one cycle from sample to level,
// bits come SAMPLES_PER_BIT/2 samples after the edge that centred them.
//
// The paper gives the envelope downlink and the AD9235 ADC; the tracker
// slicer, the bit rate and the carrier rule are this design's choices.
module ask_demod #(
  parameter int unsigned SAMPLE_W        = 12,  // AD9235 resolution
  parameter int unsigned SAMPLES_PER_BIT = 50,  // 8 MS/s over a 160 kbit/s downlink
  parameter int unsigned DECAY_SHIFT     = 10,
  parameter int unsigned MIN_SWING       = 64,
  parameter int unsigned CARRIER_BITS    = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                sample_valid,
  input  logic [SAMPLE_W-1:0] sample,
  output logic                level,      // sliced envelope
  output logic                bit_valid,
  output logic                bit_out,
  output logic                carrier
);
  localparam int unsigned CW  = $clog2(SAMPLES_PER_BIT + 1);
  localparam int unsigned RUN = CARRIER_BITS * SAMPLES_PER_BIT;
  localparam int unsigned RW  = $clog2(RUN + 1);

  logic [SAMPLE_W-1:0] peak, valley;
  logic [SAMPLE_W:0]   mid_sum;
  logic                above_mid, lvl_next;
  logic [CW-1:0]       phase_cnt;
  logic [RW-1:0]       run_cnt;

  assign mid_sum  = {1'b0, peak} + {1'b0, valley};
  assign above_mid = {1'b0, sample} > (mid_sum >> 1);
  assign lvl_next  = (peak - valley >= SAMPLE_W'(MIN_SWING)) && above_mid;

  // Envelope trackers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      peak   <= '0;
      valley <= '0;
    end else if (sample_valid) begin
      if (sample > peak)
        peak <= sample;
      else if (above_mid && sample != peak)
        peak <= peak - ((peak - sample) >> DECAY_SHIFT) - 1'b1;
      if (sample < valley)
        valley <= sample;
      else if (!above_mid && sample != valley)
        valley <= valley + ((sample - valley) >> DECAY_SHIFT) + 1'b1;
    end
  end

  // Slicer, bit timing and carrier detection
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      level     <= 1'b0;
      phase_cnt <= CW'(SAMPLES_PER_BIT - 1);
      bit_valid <= 1'b0;
      bit_out   <= 1'b0;
      run_cnt   <= '0;
      carrier   <= 1'b0;
    end else begin
      bit_valid <= 1'b0;
      if (sample_valid) begin
        level <= lvl_next;
        if (lvl_next != level) begin
          phase_cnt <= CW'(SAMPLES_PER_BIT / 2 - 1);
        end else if (phase_cnt == '0) begin
          phase_cnt <= CW'(SAMPLES_PER_BIT - 1);
          bit_valid <= 1'b1;
          bit_out   <= lvl_next;
        end else begin
          phase_cnt <= phase_cnt - 1'b1;
        end
        if (!lvl_next) begin
          run_cnt <= '0;
          carrier <= 1'b0;
        end else if (run_cnt != RW'(RUN)) begin
          run_cnt <= run_cnt + 1'b1;
        end else begin
          carrier <= 1'b1;
        end
      end
    end
  end
endmodule
