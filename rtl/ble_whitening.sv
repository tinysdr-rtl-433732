// ble_whitening: data whitening for a Bluetooth Low Energy packet.
//
// A 7-bit LFSR with polynomial x^7 + x^4 + 1 produces a pseudo-random
// sequence that is xor-ed onto the PDU and CRC bits so that the packet has
// no long runs of ones or zeros. Positions 0..6 of the register follow the
// Bluetooth specification: `init` loads position 0 with 1 and positions
// 1..6 with channel bits 5..0; on every clock with `en` the output bit is
// position 6, dout = din ^ position 6, the register shifts up by one,
// position 6 feeds back into position 0 and is xor-ed into position 4.
// The polynomial and seeding from the channel number follow the paper,
// which says the register starts from the lower 7 bits of the channel
// number; for channels 0..39 this design uses the specification's seed
// {1, channel[5:0]} so that standard receivers can de-whiten the packet.
module ble_whitening (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       init,
  input  logic [5:0] channel,
  input  logic       en,
  input  logic       din,
  output logic       dout
);
  logic [6:0] r;   // r[k] is position k

  assign dout = din ^ r[6];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    r <= 7'b0000001;
    else if (init) r <= {channel[0], channel[1], channel[2], channel[3], channel[4], channel[5], 1'b1};
    else if (en)   r <= {r[5], r[4], r[3] ^ r[6], r[2], r[1], r[0], r[6]};
endmodule
