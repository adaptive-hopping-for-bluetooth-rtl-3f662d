# Adaptive channel hopping for a BLE backscatter tag

A BLE backscatter tag does not transmit. It reflects a BLE signal that
another device (the *excitor*) sends, and toggles an RF switch to move that
signal to a different channel. Toggling at `f_t` copies an excitation tone at
`f_0` to `f_0 + f_t` and `f_0 - f_t`. If the tag changes the switch phase by
0 or π every microsecond, those copies carry a valid BLE 1 Mbit/s packet.

The hard part is the channel. BLE devices hop: the excitor moves to a new
channel for every connection event or advertising packet, up to about every
7.5 ms. A tag that must land on a chosen target channel has two problems:

* It must know `f_0` before the packet arrives, and it cannot demodulate
  frequency-shift keyed signals.
* It needs a switch clock of `|f_target - f_0|` for *every* pair of channels,
  and it has only one clock manager.

This RTL solves both the way the adaptive-hopping design it implements
proposes:

1. **An edge device helps the tag.** The edge uses commodity radios. It
   produces the excitation and also sends the tag short on-off-keyed (ASK)
   commands, which the tag decodes with an envelope detector and an ADC. The
   edge does not send frequencies. It sends the hopping metadata: which
   channel selection algorithm the excitor uses, with its parameters, and
   the excitor's packet counter. The tag then **predicts** the excitor's
   channel with the same BLE algorithm. If a command is lost or corrupted,
   the tag advances the counter itself and stays in step.
2. **The tag hops on its own.** It runs its own BLE hopping sequence (a
   fixed channel, algorithm #1 or algorithm #2) over a used-channel map. A
   scan mode walks every channel so the edge can measure which target
   channels work well; it can then change the map to leave out the poor
   ones.
3. **A table of clock states replaces a bank of oscillators.** BLE channels
   sit on a 2 MHz grid, so every channel pair is `2k MHz` apart with
   `k = 0..39`. Both sidebands carry the packet, so one switch clock serves
   the channel `k` steps above and the one `k` steps below. That makes 39
   distinct clocks. Each one is a precomputed *state*: the 17 register
   words that reprogram the FPGA's MMCM (mixed-mode clock manager). Before
   each packet the tag looks up `state[excitation][target]` and, if the
   state differs from the one loaded, rewrites the MMCM through its dynamic
   reconfiguration port (DRP).
4. **The tag rebuilds the packet for the target channel.** It serialises
   preamble, access address, PDU and CRC-24, whitens them with the *target*
   channel's seed, and phase-modulates the switch clock with the result.

## Signal flow

```
 ADC samples ─► ask_demod ─► dl_deframer ─► cmd_regs ─┬─► tag_ctrl ◄── carrier
 (envelope)     bits,         checked        config,  │     │  │  │
                carrier       frames         counter, │     │  │  └─► ble_pkt_gen ─► phase_mod ─► rf_switch
                                             PDU      │     │  │                        ▲
                                                      │     │  └─► drp_reconfig ─► MMCM DRP ──┘ 4 clock phases
                                                      │     │          ▲
                                                      │     └─► hop_select ×2 ─► clk_state_table
                                                      │         (excitation,       state[exc][tgt],
                                                      │          target)           DRP words
```

`cd_tag_top` wires these together. The parts that are not logic connect
through ports:

* the envelope ADC: `adc_valid`, `adc_sample`;
* the MMCM: DRP port, `mmcm_rst`, `mmcm_locked` and its four outputs
  `mmcm_clk_ph`;
* the RF switch: `rf_switch`;
* tag sensor data: `tag_wr_*` bytes into the packet buffer.

Everything runs on one clock `clk` (100 MHz), which is also the MMCM
reference. The one exception is a small divider in `phase_mod`, which runs
on the MMCM's 0° output.

## The clock states

### Channel pair to state

BLE channel index `ch` is RF channel `rf(ch)`, at `2402 + 2·rf` MHz:

| channel index | 37 | 0..10 | 38 | 11..36 | 39 |
|---|---|---|---|---|---|
| rf | 0 | 1..11 | 12 | 13..38 | 39 |

The clock state of a pair is `k = |rf(exc) - rf(tgt)|`, giving a switch clock
of `2k` MHz. `k = 0` means no shift: the tag cannot move a packet onto its own
frequency, so it lets that carrier pass. The 1600-entry `state[exc][tgt]`
table in `clk_state_table` is built from this rule at elaboration.

The three advertising channels are not at the ends of the index range. This
matters: the pair (37, 0) is 2 MHz apart, not 74 MHz. Illustrations that
treat channel indices as contiguous frequencies give the same answer only for
pairs of data channels on the same side of channel 38.

### Factors

An MMCM output is `f = f_in · M / D / O`:

* `M` is the feedback multiply;
* `D` is the input divide;
* `O` is the output divide.

The VCO `f_in·M/D` must stay within 600–1200 MHz, and `f_in/D` must be at
least 10 MHz. With `f_in = 100 MHz` every required clock `2k` MHz for
`k = 3..39` has an exact factor set. Examples:

* 6 MHz = 100·6/1/100;
* 26 MHz = 100·13/2/25;
* 78 MHz = 100·39/5/10.

The output divide stops at 128, so 2 MHz and 4 MHz are made as 8 MHz with
a fabric divide by 4 or 2. This `post_log2` is stored with the state. The
factor table is `factors_of_state` in `cd_pkg.sv`.

### DRP words

A state is `9 + 2n` words for `n = 4` output clocks, which is 17 words of 39
bits (663 bits). Each word is `{addr[6:0], mask[15:0], data[15:0]}` in the
order below. Write an MMCM register as `reg = (reg & mask) | data`.

| word | address | content |
|---|---|---|
| 0 | 0x28 | power register, all ones |
| 1..8 | 0x08..0x0F | CLKOUT0..3 registers 1 and 2 at 0°, 90°, 180°, 270° |
| 9 | 0x16 | input divider D |
| 10, 11 | 0x14, 0x15 | feedback counter M |
| 12..14 | 0x18..0x1A | lock counts |
| 15, 16 | 0x4E, 0x4F | loop filter |

Counter register 1 holds `{phase_mux[2:0], 0, high[5:0], low[5:0]}` with
`high = O/2` and `low = O - high`. Register 2 holds the odd-divide `edge`
bit, the `no_count` bit for a divide of 1, and a 6-bit delay in whole VCO
cycles. A phase of `ph·90°` on a divide-by-`O` output is `O·ph/4` VCO
cycles, stored as delay plus eighths. For divides above 84 the 90°/270°
delays hit the 63-cycle limit and saturate. The modulator uses only 0° and
180°, which always fit.

**Trust note.** The lock and filter words are fixed constants. A vendor
tool would pick them per multiplier from a table. For a real build,
regenerate words 12–16 with the vendor's tool or XAPP888's tables. The
factor values themselves are exact.

### Loading

`drp_reconfig` runs these steps:

1. Assert `mmcm_rst`.
2. For each of the 17 words: read the register, merge it with the mask, and
   write it back. Each access waits for `drdy`, and only one access is ever
   outstanding. An assertion checks this.
3. Release the reset and wait for `locked`.

With a DRP answering in L cycles, loading takes `17·(4+2L)` cycles plus the
lock time. That is 2.4 µs in the system test, whose MMCM model locks in 40
cycles. The reference implementation measured 13 µs for a whole
reconfiguration. The real lock time of the part dominates and is not
modelled. `tag_ctrl` skips the load entirely when the next pair needs the
state already loaded.

## The downlink

The tag receives the edge's commands as on-off keying. `ask_demod` slices the
envelope samples:

* **Thresholds.** A peak tracker follows the "on" level and a valley
  tracker the "off" level. Each creeps toward samples only on its own side
  of the midpoint, so long carriers and long silences do not collapse the
  threshold.
* **Bit timing.** A counter re-centres on every level change and samples
  the middle of each bit.
* **Carrier detection.** An "on" level lasting longer than `CARRIER_BITS`
  bit periods is the excitation carrier, not data.

Defaults: 8 MS/s and 50 samples per bit, which is 160 kbit/s. At that rate a
20-byte data command takes about 1.35 ms to decode, which matches the
1.3 ms decoding time reported for the original system. The carrier flag
rises 8 bit periods (50 µs) after the carrier starts.

Frame format (`dl_deframer`), MSB first:

```
SYNC 0xD391 | TYPE (8) | LEN (8) | PAYLOAD (LEN ≤ 32 bytes) | CRC-8 (x^8+x^2+x+1, init 0, over TYPE..PAYLOAD)
```

After the sync word, the sender inserts the opposite bit after every five
equal bits. This has three effects:

* the demodulator sees an edge at least every six bits;
* runs of eight "on" bits can only be the carrier;
* a sixth equal bit inside a frame is a framing error.

The last point matters: a frame with a corrupted length byte ends at the
next gap instead of swallowing the following frame. The carrier aborts any
frame in progress.

Commands (`cmd_regs`). Multi-byte fields are little endian.

| type | name | payload |
|---|---|---|
| 0x01 | START | – |
| 0x02 | STOP | – |
| 0x03 | EXC_CNT | excitation packet counter, 2 bytes |
| 0x04 | EXC_CFG | how the excitor hops: 12-byte config |
| 0x05 | TGT_CFG | how the tag hops: 12-byte config |
| 0x06 | USED_MAP | target used map, 37 bits in 5 bytes |
| 0x07 | LINK_CFG | uplink access address (4), CRC initial value (3) |
| 0x08 | DATA | byte 0 = offset into the PDU buffer, then PDU bytes |

The 12-byte hopping config is laid out as:

* byte 0: algorithm (0 fixed, 1 BLE #1, 2 BLE #2, 3 scan);
* byte 1: hop increment;
* bytes 2..5: access address;
* bytes 6..10: used map;
* byte 11: fixed channel.

An excitor parked on one channel (for example advertising channel 37) is
simply a "fixed" excitation config.

## Hopping and sequencing

`hop_select` computes a channel from a 16-bit event counter in one cycle.
Two instances run side by side: one for the excitation, one for the
target.

* **Algorithm #1.** The unmapped channel is `hop·(n+1) mod 37`, the closed
  form of the specification's running sum starting from channel 0. If that
  channel is unused, the result is entry `unmapped mod N` of the used
  channels in ascending order. The closed form lets a counter received from
  the edge give its channel at once. The sequence restarts when the 16-bit
  counter wraps.
* **Algorithm #2.** This is the specification's form: channel identifier
  `AA[31:16]^AA[15:0]`, three rounds of bit permutation and multiply-add
  mod 2^16, then either the unmapped channel `prn mod 37` or entry
  `N·prn/2^16` of the used list. It reproduces the specification's sample
  data.
* **Fixed.** The config's channel.
* **Scan.** Channel index `counter mod 40`, so the tag visits every
  channel, the three advertising channels included. The edge uses this to
  measure each target channel's quality before it writes a used map that
  leaves out the poor ones. The excitation's own channel comes up once per
  round as a no-shift pair and is skipped.

`tag_ctrl` sequences one excitation at a time:

```
IDLE --START--> compute channels (1 cycle) -> look up state (1) -> decide
decide: state 0            -> wait for carrier (will let it pass)
        state == loaded    -> wait for carrier (reuse)
        otherwise          -> load the MMCM, then wait for carrier
carrier rises: packet (or pass) -> carrier ends -> both counters +1 -> compute ...
```

Counter rules:

* A checked EXC_CNT command replaces the excitation counter and triggers a
  recompute.
* If the command arrives while the tag is busy with a packet or a load, it
  is held and applied as soon as the tag is ready.
* A missed or corrupted command costs nothing: the tag has already moved
  to the next counter itself.
* The target counter restarts at 0 whenever a hopping config or the used
  map changes.

Event counters on the top's ports report loads, corrections, self
increments, clock reloads, reuses, packets and passed carriers. The path
from `hop_start` to the load request is 4 cycles. The packet starts one
cycle after the carrier flag.

## The uplink

`ble_pkt_gen` builds the BLE 1M packet LSB first:

* preamble 0xAA or 0x55, matching the first access-address bit;
* access address;
* PDU: `2 + pdu[1]` bytes from the 39-byte buffer;
* CRC-24 over the PDU, polynomial 0x00065B in its reflected LSB-first form,
  preset with the bit-reversed CRC initial value.

PDU and CRC are whitened with the 7-bit LFSR `x^7+x^4+1`, seeded with
`0x40 | target_channel`. One bit goes out per 100 cycles (1 µs).

`phase_mod` turns bits into switch phases:

* a BLE symbol 1 is a phase step of π across the symbol, which is +500 kHz
  on the upper copy and −500 kHz on the lower one;
* since +π and −π are the same phase, one switch sequence serves both
  copies;
* a symbol 0 keeps the phase.

So the switch phase is the running XOR of the bits. For example, bits
`0,1,1,0,1,0,1,1` give phases `0,π,0,0,π,π,0,π`. The switch clock is the
MMCM's 0° output for phase 0 and its 180° output for phase π. For the two
post-divided states, the fabric divider's output is inverted instead.
`rf_switch` is low outside a packet.

## Files

| file | content |
|---|---|
| `rtl/cd_pkg.sv` | channel map, types, command codes, clock factors, DRP word encoding, CRC-8 |
| `rtl/ask_demod.sv` | envelope slicer, bit timing, carrier detection |
| `rtl/dl_deframer.sv` | sync search, de-stuffing, CRC-8 check |
| `rtl/cmd_regs.sv` | command decoding, configuration, PDU buffer |
| `rtl/hop_select.sv` | channel of an event counter (uses `csa1`, `csa2`, `chan_remap`) |
| `rtl/clk_state_table.sv` | `state[exc][tgt]` and the 39 × 17 DRP word ROM |
| `rtl/drp_reconfig.sv` | DRP read-modify-write loader |
| `rtl/tag_ctrl.sv` | per-excitation sequencer and counters |
| `rtl/ble_pkt_gen.sv` | BLE packet serialiser with CRC-24 and whitening |
| `rtl/phase_mod.sv` | phase selection, clock mux, post-divider |
| `rtl/cd_tag_top.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per block, `tb_cd_tag_top` for the whole tag, `tb_workload_hopping` for the hopping workloads |
| `tb/tb_edge_pkg.sv` | downlink frame builder and specification reference models (both hopping algorithms, BLE packet bits) |
| `tb/mmcm_model.sv` | behavioural MMCM: DRP register file, lock, four outputs with real delays from the programmed M, D, O and phase |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. Each has a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_cd_tag_top \
  -y rtl -y tb rtl/cd_pkg.sv tb/tb_edge_pkg.sv tb/tb_cd_tag_top.sv -o sim
./obj_dir/sim
```

Replace the top module for the block tests, for example
`tb_hop_select` or `tb_drp_reconfig`. The tests start from random state
values, so everything they read is reset.

The system test `tb_cd_tag_top` runs the top at its default parameters and
takes about 20 s. It contains:

* an edge model that sends ASK frames as noisy 8 MS/s envelope samples and
  300 µs excitation carriers;
* the MMCM model.

It walks through these scenarios:

* link and PDU setup;
* excitor on algorithm #2 over channels 17..31, tag on algorithm #1;
* correct, missing, corrupted and correcting counter commands;
* a tag data write;
* fixed channels: a 2 MHz (post-divided) pair, a pair used twice, a pair
  with no shift;
* a restricted used map;
* a target channel scan;
* STOP.

For every excitation it checks:

* both channels, against its own models of the BLE algorithms;
* the state loaded;
* whether a packet was sent.

For each packet it also checks:

* the switch frequency, from the edge count;
* where the MMCM output drives the switch directly, the packet itself: it
  recovers the bits from the switch phase against the 0° clock and compares
  them with a specification-built packet for the target channel.

It fails if any of its counted mechanisms never happens: frames accepted or
rejected, loads, corrections, self increments, reloads, reuses, packets,
passed carriers, each hopping mode, a post-divided state, a tag write
and STOP.

Block tests of note:

* `tb_workload_hopping` runs the hopping workloads:
  * the first 1000 events of both algorithms over used channels 17..31,
    against the specification models. Algorithm #1 gives 81 events on each
    of channels 18..21, the expected count of the original evaluation;
  * excitation on channels 33..35 with targets 22..26: states 7..13;
  * all 1600 channel pairs.

* `tb_hop_select` checks the specification's sample data for algorithm #2
  and random configurations against reference models.
* `tb_clk_state_table` decodes every DRP word of all 39 states back into a
  frequency and phase, and checks all 1600 pairs.
* `tb_drp_reconfig` checks the merged register values and the cycle count.
* `tb_ble_pkt_gen` compares whole packets with a reference that uses the
  specification's MSB-first CRC and whitening registers.

## Where this departs from, or adds to, the original design

* **Invented formats.** The downlink rate, frame format, bit stuffing,
  CRC-8 and command codes are this design's. The original describes only
  an ASK downlink whose packets the tag checks.
* **Clock factors.** The factors come from a 100 MHz reference by exact
  search, not from a vendor wizard. The four clocks of a state are four
  phases of the modulation clock. The 2 and 4 MHz states use a fabric
  divider. Lock and filter words are constants (see the trust note above).
* **Reconfiguration time.** It is computed from the DRP handshake. The
  13 µs measured for the original includes the MMCM's lock time, which
  only the real part has.
* **Table size.** The table holds the 39 states the channel plan needs.
  Resource measurements of the original with up to 64 stored states have no
  counterpart here.
* **Added behaviour.** The handling of a counter command that arrives
  mid-packet, the no-shift rule, skipping a reload of the loaded state, and
  the event counters are additions.
* **Algorithm #1.** It is computed in closed form from the counter.
* **Not built.**
  * The edge device (its radios, MCU and firmware).
  * The envelope detector, ADC, RF switch and MMCM, which are parts, not
    logic.
  * Any link-layer timing for holding a BLE connection: when to send which
    PDU is left to the edge's excitation schedule.
  * Multiple tags sharing an edge. The original mentions this only as
    future work.
* **Bit orders.** The CRC-24 and whitening bit orders follow the Bluetooth
  Core specification and agree with an independent model. They have not
  been checked against a packet captured from a commodity receiver.
