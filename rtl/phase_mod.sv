// phase_mod: phase modulation of the RF switch clock ("MUX" and "Modulation").
//
// The RF switch toggles at the shift frequency f_t, which copies the
// excitation tone f_0 to f_0 + f_t and f_0 - f_t. A phase step of the switch
// clock by pi over one 1 us symbol is a frequency offset of +500 kHz on the
// upper copy and -500 kHz on the lower one; since -pi and pi are the same
// phase, one switch sequence makes a valid BLE symbol 1 on both copies and a
// constant phase makes symbol 0. So the switch phase is the running XOR of
// the packet bits: each 1 flips it between 0 and pi, each 0 keeps it. For the
// bits 0,1,1,0,1,0,1,1 the phases are 0,pi,0,0,pi,pi,0,pi.
//
// The MMCM supplies the state's clock in four phases (0, 90, 180, 270
// degrees); the mux passes the 0 or 180 degree one. For the two slowest
// states, which the MMCM cannot divide down to, a fabric counter on the
// 0 degree clock divides by 2**post_log2 and a phase of pi inverts it.
// rf_switch is low while `enable` is low.
//
// Timing: the phase register updates on sym_valid (the first cycle of each
// symbol, clk domain), so the switch changes phase within a cycle of the
// symbol start. The clock mux is combinational; an FPGA build puts it in a
// clock buffer multiplexer (BUFGMUX), and the symbol-boundary glitch it may
// make is part of the phase step anyway.
//
// Follows the paper's phase modulation and its 4-clock MUX; the use of the
// 0/180 degree clocks and the fabric post-divider are this design's.
module phase_mod (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       enable,
  input  logic       sym_valid,
  input  logic       bit_in,
  input  logic [3:0] clk_ph,      // MMCM outputs at 0, 90, 180, 270 degrees
  input  logic [1:0] post_log2,   // fabric divide of the slowest states
  output logic       phase_pi,    // current switch phase is pi
  output logic       rf_switch
);
  logic [1:0] div_cnt;
  logic       slow_clk;
  logic       mod_clk;

  // symbol phase: running XOR of the bits
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          phase_pi <= 1'b0;
    else if (!enable)    phase_pi <= 1'b0;
    else if (sym_valid)  phase_pi <= phase_pi ^ bit_in;
  end

  // fabric post-divider in the modulation clock domain
  always_ff @(posedge clk_ph[0] or negedge rst_n) begin
    if (!rst_n) div_cnt <= '0;
    else        div_cnt <= div_cnt + 2'd1;
  end

  assign slow_clk = (post_log2 == 2'd1) ? div_cnt[0] : div_cnt[1];
  assign mod_clk  = (post_log2 == 2'd0) ? (phase_pi ? clk_ph[2] : clk_ph[0])
                                        : (slow_clk ^ phase_pi);
  assign rf_switch = enable & mod_clk;
endmodule
