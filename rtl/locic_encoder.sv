// locic_encoder: one channel of the LOCic low-latency encoder (Fig. 12).
//
// Eight serial ADC lanes enter as one 8-bit word per data-clock edge together
// with the 40 MHz frame clock. The Sync FIFO moves them to the 640 MHz LOC
// clock (1-2 cycles); the frame builder then, in one cycle, scrambles the 14
// user slots, appends the CRC-8 of the unscrambled user data and the control
// byte "1010" + 4-bit PRBS BCID field, and outputs one 8-bit word per LOC
// clock: 16 words = 128 bits per 25 ns frame, 5.12 Gb/s, 87.5 % efficiency.
// The latency from a word entering to it leaving is 2-3 LOC cycles, within
// the 4 cycles (6.25 ns) the source states for the encoder.
//
// Clocks: data_clk (write side of the FIFO) and clk (640 MHz). Resets are
// synchronous, one per domain; bc_reset restarts the BCID sequence.
module locic_encoder
  import locic_pkg::*;
#(
  parameter int unsigned USER_SLOTS = locic_pkg::DEF_USER_SLOTS
) (
  input  logic       data_clk,
  input  logic       data_rst,
  input  logic [7:0] din,
  input  logic       frame_clk,
  input  logic       clk,
  input  logic       rst,
  input  logic       bc_reset,
  output logic [7:0] dout,
  output logic [4:0] dout_slot,
  output slot_kind_e dout_kind,
  output logic       dout_valid
);
  logic [7:0] f_data;
  logic       f_sof, f_valid;
  logic [7:0] scr_data, crc, ctrl_byte;
  logic       scr_en, crc_en, crc_start, bcid_en;
  logic [11:0] prbs_state;

  sync_fifo #(.WIDTH(8), .DEPTH(4)) u_fifo (
    .wclk(data_clk), .wrst(data_rst), .din(din), .frame_clk(frame_clk),
    .rclk(clk), .rrst(rst), .dout(f_data), .dout_sof(f_sof), .dout_valid(f_valid));

  prbs_gen u_prbs (
    .clk(clk), .bc_reset(bc_reset), .bcid_en(bcid_en), .ctrl_byte(ctrl_byte),
    .state(prbs_state));

  crc_gen u_crc (
    .clk(clk), .rst(rst), .crc_en(crc_en), .start(crc_start), .data(f_data), .crc(crc));

  scrambler u_scr (
    .clk(clk), .rst(rst), .scr_en(scr_en), .data(f_data), .scr_data(scr_data));

  frame_builder #(.USER_SLOTS(USER_SLOTS)) u_fb (
    .clk(clk), .rst(rst), .in_data(f_data), .in_sof(f_sof), .in_valid(f_valid),
    .scr_data(scr_data), .crc(crc), .ctrl_byte(ctrl_byte),
    .scr_en(scr_en), .crc_en(crc_en), .crc_start(crc_start), .bcid_en(bcid_en),
    .dout(dout), .dout_slot(dout_slot), .dout_kind(dout_kind), .dout_valid(dout_valid));

  logic unused_prbs;
  assign unused_prbs = ^prbs_state;
endmodule
