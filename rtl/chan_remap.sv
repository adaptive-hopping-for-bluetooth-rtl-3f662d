// chan_remap: picks the channel of an algorithm's unmapped index.
//
// Returns `unmapped` when that data channel is set in the used map, and
// otherwise the remap_index-th used channel counted in ascending order
// (the remapping table of the BLE channel selection algorithms). Also counts
// the used channels (N) for the algorithms. Purely combinational.
module chan_remap
  import cd_pkg::*;
(
  input  chan_map_t  used_map,
  input  logic [5:0] unmapped,
  input  logic [5:0] remap_index,
  output logic [5:0] num_used,
  output logic [5:0] channel
);
  always_comb begin
    logic [5:0] seen;
    logic [5:0] picked;
    num_used = '0;
    for (int i = 0; i < 37; i++) num_used = num_used + 6'(used_map[i]);
    seen   = '0;
    picked = '0;
    for (int i = 0; i < 37; i++) begin
      if (used_map[i]) begin
        if (seen == remap_index) picked = 6'(i);
        seen = seen + 6'd1;
      end
    end
    channel = (unmapped < 6'd37 && used_map[unmapped]) ? unmapped : picked;
  end
endmodule
