// crc_gen: CRC generator of the LOCic encoder. It accumulates an 8-bit CRC
// with the polynomial P(x) = x^8+x^5+x^3+x^2+x+1 over the user bits of a
// frame (112 bits: 14 slots of 8 lanes), before scrambling.
//
// At each pulse of crc_en (the "CRC Clk") one 8-bit slot is folded in, lane 0
// first; with start set the register is first cleared to CRC_INIT, so the
// first user slot of a frame begins a new CRC. crc holds the value including
// every slot folded in so far and is read by the frame builder in the first
// control slot. One cycle per slot. The polynomial is the source's; the
// initial value (0) and the bit order are this design's choices.
module crc_gen
  import locic_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       crc_en,
  input  logic       start,
  input  logic [7:0] data,
  output logic [7:0] crc
);
  always_ff @(posedge clk) begin
    if (rst)         crc <= CRC_INIT;
    else if (crc_en) crc <= crc8_bits(start ? CRC_INIT : crc, {8'h00, data}, 8);
  end
endmodule
