// crc16_ccitt: frame check sequence of the MAC frame.
//
// The FCS is the 16-bit CRC-CCITT of the MAC header and payload. As in IEEE
// 802.15.4 the register starts at zero, bits are taken least significant
// first, the polynomial x^16 + x^12 + x^5 + 1 is used in its reflected form
// (0x8408) and there is no final inversion; the result is sent low byte first.
// Running a received MPDU including its FCS through the same register leaves
// zero when the frame is intact.
//
// One byte is absorbed per clock in which `en` is high; `clr` has priority and
// restores the initial value. `crc` is the registered remainder.
module crc16_ccitt
  import mac154_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic        en,
  input  logic [7:0]  data,
  output logic [15:0] crc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   crc <= '0;
    else if (clr) crc <= '0;
    else if (en)  crc <= crc16_byte(crc, data);
  end
endmodule
