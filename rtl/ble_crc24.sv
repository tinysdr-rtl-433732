// ble_crc24: the 24-bit CRC of a Bluetooth Low Energy packet.
//
// A linear feedback shift register with polynomial
// x^24 + x^10 + x^9 + x^6 + x^4 + x^3 + x + 1 (taps 0x00065B). `init`
// loads 0x555555; then every clock with `en` shifts in one PDU bit (bits
// in transmission order, each byte least significant bit first): the
// feedback is crc[23] xor the bit, the register shifts left and the taps
// are xor-ed with the feedback. After the last PDU bit `crc` is the CRC,
// sent from bit 23 down to bit 0. Polynomial, seed and bit order follow the
// paper; the shift direction and output bit order are those of the
// Bluetooth specification.
module ble_crc24 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init,
  input  logic        en,
  input  logic        din,
  output logic [23:0] crc
);
  localparam logic [23:0] POLY = 24'h00065B;
  localparam logic [23:0] SEED = 24'h555555;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    crc <= SEED;
    else if (init) crc <= SEED;
    else if (en)   crc <= {crc[22:0], 1'b0} ^ ((crc[23] ^ din) ? POLY : 24'h0);
endmodule
