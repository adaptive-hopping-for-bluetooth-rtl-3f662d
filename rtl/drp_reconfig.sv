// drp_reconfig: loads one clock state into the MMCM through its DRP port.
//
// The modulation clock is changed by rewriting the MMCM's configuration
// registers while the tag runs. On `start` this block holds the MMCM in
// reset, then for each of the state's DRP_WORDS words reads the register at
// the word's address, keeps the bits the mask marks, ORs in the word's data
// and writes the result back (read-modify-write, as Xilinx application note
// XAPP888 does). After the last write it releases the reset, waits for
// `locked` and pulses `done`.
//
// Interfaces:
//   - ROM port: rom_state/rom_word select a word, rom_data returns it one
//     cycle later (clk_state_table's word port);
//   - DRP: den/dwe/daddr/di out, do_i/drdy in, clocked by clk (DCLK). One
//     access at a time; a new one starts only after drdy of the last.
// Timing: per word 2 cycles plus two DRP round trips; with the MMCM's DRP
// answering in L cycles a state of 17 words takes 17*(4 + 2L) + 2 cycles to
// the reset release, then the lock time. At 100 MHz that is a few
// microseconds; the paper measures 13 us for a complete reconfiguration.
//
// The paper loads the selected state's registers into the PLL; the
// read-modify-write sequence is XAPP888's, the handshake details are this
// design's.
module drp_reconfig
  import cd_pkg::*;
#(
  parameter int unsigned WORDS = DRP_WORDS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  state_idx_t  state,
  output logic        busy,
  output logic        done,
  // clock state ROM
  output state_idx_t  rom_state,
  output logic [4:0]  rom_word,
  input  drp_word_t   rom_data,
  // MMCM dynamic reconfiguration port
  output logic        den,
  output logic        dwe,
  output logic [6:0]  daddr,
  output logic [15:0] di,
  input  logic [15:0] do_i,
  input  logic        drdy,
  output logic        mmcm_rst,
  input  logic        locked
);
  typedef enum logic [2:0] {S_IDLE, S_ADDR, S_READ, S_WAIT_R, S_WAIT_W, S_LOCK} state_e;
  state_e    st;
  drp_word_t word_q;

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      done      <= 1'b0;
      rom_state <= '0;
      rom_word  <= '0;
      word_q    <= '0;
      den       <= 1'b0;
      dwe       <= 1'b0;
      daddr     <= '0;
      di        <= '0;
      mmcm_rst  <= 1'b0;
    end else begin
      done <= 1'b0;
      den  <= 1'b0;
      dwe  <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          rom_state <= state;
          rom_word  <= '0;
          mmcm_rst  <= 1'b1;
          st        <= S_ADDR;
        end
        S_ADDR: st <= S_READ;  // ROM output valid next cycle
        S_READ: begin
          word_q <= rom_data;
          den    <= 1'b1;
          daddr  <= rom_data.addr;
          st     <= S_WAIT_R;
        end
        S_WAIT_R: if (drdy) begin
          den   <= 1'b1;
          dwe   <= 1'b1;
          di    <= (do_i & word_q.mask) | word_q.data;
          st    <= S_WAIT_W;
        end
        S_WAIT_W: if (drdy) begin
          if (rom_word == 5'(WORDS - 1)) begin
            mmcm_rst <= 1'b0;
            st       <= S_LOCK;
          end else begin
            rom_word <= rom_word + 5'd1;
            st       <= S_ADDR;
          end
        end
        S_LOCK: if (locked) begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // One DRP access in flight: no new enable while waiting for drdy.
  logic outstanding;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    outstanding <= 1'b0;
    else if (den)  outstanding <= 1'b1;
    else if (drdy) outstanding <= 1'b0;
  end
  always_ff @(posedge clk) begin
    if (rst_n) a_one_access: assert (!(den && outstanding))
      else $error("DRP access started before the previous one completed");
  end
endmodule
