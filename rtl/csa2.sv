// csa2: BLE channel selection algorithm #2 for a given event counter.
//
// The channel identifier is the XOR of the two halves of the access address.
// The pseudo-random number prn_e comes from (counter XOR identifier) passed
// three times through PERM (bit reversal inside each byte) followed by MAM
// ((17*a + identifier) mod 2**16), then XORed with the identifier again. The
// unmapped channel is prn_e mod 37; if it is unused, the remapping index is
// (N * prn_e) >> 16 into the ascending table of the N used channels.
// Purely combinational.
//
// The paper names algorithm #2 (channel from the used channels, the access
// address and the event counter); the definition is the Bluetooth Core
// specification's.
module csa2
  import cd_pkg::*;
(
  input  logic [15:0] counter,
  input  logic [31:0] aa,
  input  logic [5:0]  num_used,
  output logic [5:0]  unmapped,
  output logic [5:0]  remap_index
);
  function automatic logic [15:0] perm(input logic [15:0] a);
    logic [15:0] r;
    for (int i = 0; i < 8; i++) begin
      r[i]     = a[7 - i];
      r[8 + i] = a[15 - i];
    end
    return r;
  endfunction

  logic [15:0] chan_id, u1, u2, u3, prn_e;
  logic [21:0] scaled;

  always_comb begin
    chan_id = aa[31:16] ^ aa[15:0];
    u1      = 16'((perm(counter ^ chan_id) * 17) + chan_id);
    u2      = 16'((perm(u1) * 17) + chan_id);
    u3      = 16'((perm(u2) * 17) + chan_id);
    prn_e   = u3 ^ chan_id;
  end

  assign unmapped    = 6'(prn_e % 16'd37);
  assign scaled      = 22'(num_used) * 22'(prn_e);
  assign remap_index = scaled[21:16];
endmodule
