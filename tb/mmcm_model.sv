// mmcm_model: behavioural model of the FPGA clock manager (MMCM) the tag
// reprograms. Not synthesizable: it stands in for the vendor primitive in
// simulation only.
//
// It keeps the part of the primitive the tag uses, with the primitive's port
// names: the dynamic reconfiguration port (DCLK, DEN, DWE, DADDR, DI, DO,
// DRDY), RST, LOCKED and four outputs CLKOUT0..3. DRP accesses answer after
// DRDY_LAT DCLK cycles from a 128 x 16 register file (reset to 0); a second
// access while one is outstanding is flagged. LOCKED falls with RST and rises
// LOCK_CYCLES DCLK cycles after RST is released, but only if the programmed
// voltage-controlled oscillator lies in 600..1200 MHz; a bad setting never
// locks.
//
// The outputs are built from the registers as the hardware counts them:
// VCO period = CLKIN_PERIOD * D / M, where M is the high + low time of the
// feedback counter (address 0x14, no_count bit 0x15[6] gives 1) and D that of
// the input divider (0x16, no_count bit 12); output i has divide O_i from
// registers 0x08+2i / 0x09+2i and a phase offset of (delay 0x09+2i[5:0] +
// phase mux 0x08+2i[15:13] / 8) VCO periods, with a 50 % duty cycle. All four
// start on the same lock instant, so their relative phases are exact. While
// not locked the outputs are low.
`timescale 1ns/1ps
module mmcm_model #(
  parameter real CLKIN_PERIOD = 10.0,  // ns
  parameter int  DRDY_LAT     = 3,
  parameter int  LOCK_CYCLES  = 40
) (
  input  logic        DCLK,
  input  logic        RST,
  input  logic        DEN,
  input  logic        DWE,
  input  logic [6:0]  DADDR,
  input  logic [15:0] DI,
  output logic [15:0] DO,
  output logic        DRDY,
  output logic        LOCKED,
  output logic [3:0]  CLKOUT,
  output int          access_errors
);
  logic [15:0] regs [128];
  logic [6:0]  addr_q;
  logic        we_q;
  logic [15:0] di_q;
  int          busy_cnt;
  int          lock_cnt;
  realtime     t_vco;
  real         m_f, d_f;
  logic        vco_ok;

  initial begin
    foreach (regs[i]) regs[i] = '0;
    DO = '0; DRDY = 0; LOCKED = 0; CLKOUT = '0;
    busy_cnt = 0; lock_cnt = 0; access_errors = 0;
    addr_q = '0; we_q = 0; di_q = '0;
  end

  function automatic int counter_div(input logic [15:0] r1, input logic [15:0] r2);
    if (r2[6]) return 1;
    return int'(r1[11:6]) + int'(r1[5:0]);
  endfunction

  // DRP
  always @(posedge DCLK) begin
    DRDY <= 1'b0;
    if (DEN) begin
      if (busy_cnt != 0) access_errors <= access_errors + 1;
      addr_q   <= DADDR;
      we_q     <= DWE;
      di_q     <= DI;
      busy_cnt <= DRDY_LAT;
    end else if (busy_cnt == 1) begin
      busy_cnt <= 0;
      DRDY     <= 1'b1;
      if (we_q) regs[addr_q] <= di_q;
      else      DO <= regs[addr_q];
    end else if (busy_cnt > 1) begin
      busy_cnt <= busy_cnt - 1;
    end
  end

  // lock
  always_comb begin
    m_f    = real'(counter_div(regs[7'h14], regs[7'h15]));
    d_f    = regs[7'h16][12] ? 1.0 : real'(int'(regs[7'h16][11:6]) + int'(regs[7'h16][5:0]));
    vco_ok = (m_f > 0.0) && (d_f > 0.0) &&
             (1000.0 * m_f / (CLKIN_PERIOD * d_f) >= 600.0) &&
             (1000.0 * m_f / (CLKIN_PERIOD * d_f) <= 1200.0);
  end

  always @(posedge DCLK or posedge RST) begin
    if (RST) begin
      LOCKED   <= 1'b0;
      lock_cnt <= 0;
    end else if (!LOCKED && vco_ok) begin
      if (lock_cnt == LOCK_CYCLES) LOCKED <= 1'b1;
      else lock_cnt <= lock_cnt + 1;
    end
  end

  // outputs
  for (genvar i = 0; i < 4; i++) begin : g_out
    initial begin
      realtime period, offset;
      forever begin
        CLKOUT[i] = 1'b0;
        @(posedge LOCKED);
        t_vco  = CLKIN_PERIOD * d_f / m_f;
        period = t_vco * counter_div(regs[7'h08 + 2*i], regs[7'h09 + 2*i]);
        offset = t_vco * (real'(regs[7'h09 + 2*i][5:0]) + real'(regs[7'h08 + 2*i][15:13]) / 8.0);
        #(offset);
        while (LOCKED) begin
          CLKOUT[i] = 1'b1;
          #(period / 2.0);
          CLKOUT[i] = 1'b0;
          #(period / 2.0);
        end
      end
    end
  end
endmodule
