// crc_checker: recomputes the CRC-8 (x^8+x^5+x^3+x^2+x+1) over the
// descrambled user words of each frame and compares it with the CRC the
// transmitter put in the low byte of the control word (T0-T7).
//
// Outputs, registered one rx_clk cycle after the input: the user data word
// with its index, and frame_flag; at the control word frame_end, with
// crc_flag high when the received and recomputed CRCs differ, and frame_flag
// saying whether the whole frame is valid. frame_flag is low for the first
// frame after valid words begin (lock): the descrambler feeding this block
// only has the 58 bits of history it needs from the second frame on, so that
// frame is discarded rather than reported as a CRC error. After that it is
// high on every word while words stay valid, and at frame_end only if the
// control word carried the marker. The data of a frame are only confirmed by
// the frame_flag at its end. Error polarity, the per-word frame flag and the
// discarded first frame are this design's choices; the polynomial and the
// single cycle follow the source.
module crc_checker
  import locic_pkg::*;
#(
  parameter int unsigned FW = (locic_pkg::DEF_FRAME_SLOTS) / 2
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [15:0] din,
  input  logic [3:0]  din_idx,
  input  logic        din_valid,
  input  logic        din_marker,   // control word carried the 1010 marker
  output logic [15:0] dout,
  output logic [3:0]  dout_idx,
  output logic        frame_flag,
  output logic        frame_end,
  output logic        crc_flag
);
  logic [7:0] acc;
  logic       ctrl;
  logic       primed;   // a whole frame has been seen since valid words began

  assign ctrl = din_idx == 4'(FW - 1);

  always_ff @(posedge clk) begin
    if (rst) begin
      acc        <= CRC_INIT;
      primed     <= 1'b0;
      dout       <= '0;
      dout_idx   <= '0;
      frame_flag <= 1'b0;
      frame_end  <= 1'b0;
      crc_flag   <= 1'b0;
    end else begin
      dout       <= din;
      dout_idx   <= din_idx;
      frame_flag <= din_valid && primed && (!ctrl || din_marker);
      if (!din_valid) primed <= 1'b0;
      else if (ctrl)  primed <= 1'b1;
      frame_end  <= din_valid && ctrl;
      if (din_valid && !ctrl)
        acc <= crc8_bits((din_idx == 4'd0) ? CRC_INIT : acc, din, 16);
      if (din_valid && ctrl)
        crc_flag <= acc != din[7:0];
    end
  end
endmodule
