// hop_select: the tag's hopping control, one BLE channel per event counter.
//
// On `start` it computes the channel of event `counter` under configuration
// `cfg`: the fixed channel of a self-defined sequence (any of the 40
// channels), or a data channel chosen by BLE channel selection algorithm #1
// (hop increment) or #2 (access address) and remapped onto the used map, or,
// for a channel scan, every channel in turn (index = counter mod 40), so the
// edge can measure each target channel's quality before it sets the map.
// The tag runs two of these: one predicts the excitor's channel from the
// excitation packet counter, the other picks the target channel the tag
// backscatters to.
//
// Timing: `valid` and `channel` come one cycle after `start`; `channel`
// holds until the next start. The algorithms themselves are combinational.
//
// Follows the paper's hopping control (algorithm 1, algorithm 2, self
// defined, used map) and its channel scan; the scan order, the registered
// one-cycle interface and the fixed channel as the self-defined mode are
// this design's.
module hop_select
  import cd_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  hop_cfg_t    cfg,
  input  logic [15:0] counter,
  output logic        valid,
  output ch_idx_t     channel
);
  logic [5:0] num_used;
  logic [5:0] un1, idx1, un2, idx2, un_sel, idx_sel, remapped;
  logic [5:0] scan_ch;

  csa1 u_csa1 (.counter(counter), .hop(cfg.hop), .num_used(num_used),
               .unmapped(un1), .remap_index(idx1));
  csa2 u_csa2 (.counter(counter), .aa(cfg.aa), .num_used(num_used),
               .unmapped(un2), .remap_index(idx2));

  assign un_sel  = (cfg.alg == HOP_CSA2) ? un2  : un1;
  assign idx_sel = (cfg.alg == HOP_CSA2) ? idx2 : idx1;

  chan_remap u_remap (.used_map(cfg.used_map), .unmapped(un_sel), .remap_index(idx_sel),
                      .num_used(num_used), .channel(remapped));

  assign scan_ch = 6'(counter % 16'(NUM_CH));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid   <= 1'b0;
      channel <= '0;
    end else begin
      valid <= start;
      if (start) begin
        unique case (cfg.alg)
          HOP_FIXED: channel <= cfg.fixed_ch;
          HOP_SCAN:  channel <= scan_ch;
          default:   channel <= remapped;
        endcase
      end
    end
  end
endmodule
