// clk_state_table: the lookup table of precomputed clock states.
//
// Moving an excitation on channel e to target channel t takes a modulation
// clock of |f(t) - f(e)|; with both sidebands in use one clock serves the
// channel above and the channel below, so the 40 x 40 channel pairs need only
// the 39 clocks 2, 4, ... 78 MHz. Each such clock is a "state": the words that
// reprogram the MMCM (power, four output counters at 0/90/180/270 degrees,
// input divider, feedback multiplier, lock and filter settings, 9 + 2*4 = 17
// words of 39 bits) plus a fabric post-divide for the two slowest clocks.
//
// Two read ports, both registered (one cycle of latency):
//   - pair lookup: state[exc_ch][tgt_ch], 0 when the pair needs no shift
//     (same frequency) or a channel is out of range, with the state's post
//     divide;
//   - word read: word rd_word of state rd_state, for the loader.
// Both tables are ROMs built at elaboration from cd_pkg's channel plan and
// factors, so they synthesise to LUT memory.
//
// Follows the paper: state[excitation][target], 39 states, 9 + 2n words of
// 39 bits, factors precomputed at compile time. The factor values, the four
// clock phases and the lock/filter words are this design's.
module clk_state_table
  import cd_pkg::*;
(
  input  logic        clk,
  input  ch_idx_t     exc_ch,
  input  ch_idx_t     tgt_ch,
  output state_idx_t  state,
  output logic [1:0]  post_log2,
  input  state_idx_t  rd_state,
  input  logic [4:0]  rd_word,
  output drp_word_t   rd_data
);
  typedef state_idx_t pair_lut_t [NUM_CH * NUM_CH];
  typedef logic [$bits(drp_word_t)-1:0] word_rom_t [NUM_STATES * DRP_WORDS];
  typedef logic [1:0] post_rom_t [NUM_STATES + 1];

  function automatic pair_lut_t build_pair_lut();
    pair_lut_t l;
    for (int e = 0; e < int'(NUM_CH); e++)
      for (int t = 0; t < int'(NUM_CH); t++)
        l[e * NUM_CH + t] = state_of_pair(6'(e), 6'(t));
    return l;
  endfunction

  function automatic word_rom_t build_word_rom();
    word_rom_t r;
    for (int k = 1; k <= int'(NUM_STATES); k++)
      for (int w = 0; w < int'(DRP_WORDS); w++)
        r[(k - 1) * DRP_WORDS + w] = drp_word_of_state(6'(k), 5'(w));
    return r;
  endfunction

  function automatic post_rom_t build_post_rom();
    post_rom_t r;
    clk_factors_t f;
    for (int k = 0; k <= int'(NUM_STATES); k++) begin
      f    = factors_of_state(6'(k));
      r[k] = f.post_log2;
    end
    return r;
  endfunction

  localparam pair_lut_t PAIR_LUT = build_pair_lut();
  localparam word_rom_t WORD_ROM = build_word_rom();
  localparam post_rom_t POST_ROM = build_post_rom();

  logic [10:0] pair_addr;
  logic [9:0]  word_addr;
  state_idx_t  pair_state;

  assign pair_addr  = 11'(exc_ch) * 11'(NUM_CH) + 11'(tgt_ch);
  assign pair_state = (exc_ch < 6'(NUM_CH) && tgt_ch < 6'(NUM_CH)) ? PAIR_LUT[pair_addr] : '0;
  assign word_addr  = 10'(rd_state - 6'd1) * 10'(DRP_WORDS) + 10'(rd_word);

  always_ff @(posedge clk) begin
    state     <= pair_state;
    post_log2 <= POST_ROM[pair_state];
    if (rd_state != '0 && rd_state <= 6'(NUM_STATES) && rd_word < 5'(DRP_WORDS))
      rd_data <= WORD_ROM[word_addr];
    else
      rd_data <= '0;
  end
endmodule
