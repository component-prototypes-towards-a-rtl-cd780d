// locic_decoder: the LOCic decoder of the receiver (Fig. 13), on the 16-bit
// words and the 320 MHz word clock of the deserializer.
//
// Sync controller and data extractor find the frame boundary (bit slip plus
// word index) and deliver aligned words 3 cycles after they arrive. The
// descrambler (1 cycle) and the CRC checker (1 cycle) then produce the user
// data with the frame and CRC flags; the BCID generator (2 cycles) runs beside
// them on the 4-bit field, so BCID and CRC flag come out in the same cycle,
// 5 cycles after the last word of the frame arrives.
//
// Outputs: data/data_idx (user words 0..FW-2, control word FW-1 passed as
// received), frame_flag (word delivered while locked; at frame_end: the frame
// is valid, its marker was found), frame_end with crc_flag (1 = CRC mismatch), bcid/bcid_valid, locked.
module locic_decoder
  import locic_pkg::*;
#(
  parameter int unsigned USER_SLOTS = locic_pkg::DEF_USER_SLOTS
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [15:0] din,
  output logic [15:0] data,
  output logic [3:0]  data_idx,
  output logic        frame_flag,
  output logic        frame_end,
  output logic        crc_flag,
  output logic [11:0] bcid,
  output logic        bcid_valid,
  output logic        locked,
  output logic [7:0]  slips
);
  localparam int unsigned FW = (USER_SLOTS + CTRL_SLOTS) / 2;

  logic [15:0] aligned, ext_data, dsc_data;
  logic [3:0]  offset, idx_s2, ext_idx, dsc_idx, field;
  logic        locked_s2, ext_valid, dsc_valid, field_valid, marker_ok, bcid_strobe;
  logic        marker_q;

  // Marker flag, delayed to meet the control word after the descrambler.
  always_ff @(posedge clk) marker_q <= marker_ok;

  data_extractor u_ext (
    .clk(clk), .rst(rst), .din(din), .offset(offset), .idx_in(idx_s2),
    .locked_in(locked_s2), .aligned(aligned), .dout(ext_data), .dout_idx(ext_idx),
    .dout_valid(ext_valid));

  sync_ctrl #(.FW(FW)) u_sync (
    .clk(clk), .rst(rst), .aligned(aligned), .offset(offset), .idx(idx_s2),
    .locked_now(locked_s2), .locked(locked), .bcid_field(field),
    .field_valid(field_valid), .marker_ok(marker_ok), .slips(slips));

  descrambler #(.FW(FW)) u_dsc (
    .clk(clk), .rst(rst), .din(ext_data), .din_idx(ext_idx), .din_valid(ext_valid),
    .dout(dsc_data), .dout_idx(dsc_idx), .dout_valid(dsc_valid));

  crc_checker #(.FW(FW)) u_crc (
    .clk(clk), .rst(rst), .din(dsc_data), .din_idx(dsc_idx), .din_valid(dsc_valid),
    .din_marker(marker_q), .dout(data), .dout_idx(data_idx), .frame_flag(frame_flag), .frame_end(frame_end),
    .crc_flag(crc_flag));

  bcid_gen u_bcid (
    .clk(clk), .rst(rst), .field(field), .field_valid(field_valid), .locked(locked),
    .bcid(bcid), .bcid_valid(bcid_valid), .bcid_strobe(bcid_strobe));

  logic unused;
  assign unused = bcid_strobe;
endmodule
