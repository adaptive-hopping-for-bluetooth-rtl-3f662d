// csa1: BLE channel selection algorithm #1 for a given event counter.
//
// Algorithm #1 steps through the 37 data channels by a fixed hop increment:
// unmapped(n) = (unmapped(n-1) + hop) mod 37 with unmapped(-1) = 0, so for
// event counter n the unmapped channel is hop*(n+1) mod 37. If that channel
// is not in the used map it is replaced by entry (unmapped mod N) of the
// ascending table of the N used channels; this block gives that index and
// chan_remap looks it up. Purely combinational.
//
// The paper names algorithm #1 (channel from the used channels and the hop
// interval, set by the tag); its definition here is the Bluetooth Core
// specification's. The closed form over the 16-bit counter is this design's
// choice: it restarts the sequence when the counter wraps.
module csa1
  import cd_pkg::*;
(
  input  logic [15:0] counter,
  input  logic [4:0]  hop,
  input  logic [5:0]  num_used,
  output logic [5:0]  unmapped,
  output logic [5:0]  remap_index
);
  logic [21:0] prod;
  assign prod        = 22'(hop) * (22'(counter) + 22'd1);
  assign unmapped    = 6'(prod % 22'd37);
  assign remap_index = (num_used == 6'd0) ? 6'd0 : unmapped % num_used;
endmodule
