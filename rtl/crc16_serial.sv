// crc16_serial: bit-serial CRC-16 checker for one decoding path.
//
// Shifts the message bits of a path (MSB first, CRC last) through an LFSR
// with generator x^16 + x^12 + x^5 + 1 and zero initial value. After the
// whole K-bit word, including its 16 CRC bits, has been shifted in, ok is 1
// exactly when the remainder is zero. One bit per cycle when en is high;
// clear restarts it. The decoder uses a 16-bit CRC to pick a path from the
// list; the polynomial and bit order are this implementation's choice.
module crc16_serial
  import polar_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic en,
  input  logic din,
  output logic ok,
  output logic [CRC_W-1:0] rem
);

  logic fb;
  assign fb = rem[CRC_W-1] ^ din;
  assign ok = (rem == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      rem <= '0;
    else if (clear)  rem <= '0;
    else if (en)     rem <= {rem[CRC_W-2:0], 1'b0} ^ (fb ? CRC16_POLY : '0);
  end

endmodule
