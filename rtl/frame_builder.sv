// frame_builder: assembles the LOCic frame (Fig. 11) at the 640 MHz LOC clock.
//
// Each LOC clock cycle one 8-lane word arrives from the Sync FIFO. A slot
// counter, restarted by the word tagged start-of-frame (the frame clock edge),
// numbers the slots 0..FRAME_SLOTS-1. In user slots the builder outputs the
// scrambled word and pulses the scrambler and CRC enables ("SCR Clk", "CRC
// Clk"); in the first control slot it outputs the CRC of the frame (T0-T7);
// in the second it outputs marker and BCID field (T8-T15) and pulses the
// PRBS enable ("BCID Clk"). Whatever the ADC lanes carry in the two control
// slots is dropped. The output is registered: one cycle from FIFO output to
// dout, the single cycle the source gives for PRBS, CRC, scrambler and frame
// builder together. Nothing is output (dout_valid low) until the first
// start-of-frame word.
//
// Interface: dout (bit i = lane i), dout_slot (slot number), dout_kind
// (user/CRC/marker), dout_valid. USER_SLOTS = 14 with the calibration bits,
// 12 without (source: 87.5 % and 85.7 % efficiency); the default is 14.
module frame_builder
  import locic_pkg::*;
#(
  parameter int unsigned USER_SLOTS = locic_pkg::DEF_USER_SLOTS
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] in_data,
  input  logic       in_sof,
  input  logic       in_valid,
  input  logic [7:0] scr_data,
  input  logic [7:0] crc,
  input  logic [7:0] ctrl_byte,
  output logic       scr_en,
  output logic       crc_en,
  output logic       crc_start,
  output logic       bcid_en,
  output logic [7:0] dout,
  output logic [4:0] dout_slot,
  output slot_kind_e dout_kind,
  output logic       dout_valid
);
  localparam int unsigned NSLOT = USER_SLOTS + CTRL_SLOTS;

  logic [4:0] slot_q, slot_now;
  logic       aligned_q, active;

  always_comb begin
    if (in_sof)                    slot_now = '0;
    else if (slot_q == 5'(NSLOT-1)) slot_now = '0;
    else                           slot_now = slot_q + 1'b1;
    active    = in_valid && (in_sof || aligned_q);
    scr_en    = active && (slot_now < 5'(USER_SLOTS));
    crc_en    = scr_en;
    crc_start = slot_now == '0;
    bcid_en   = active && (slot_now == 5'(USER_SLOTS + 1));
  end

  // The frame builder only reads in_data through the scrambler.
  logic unused_in;
  assign unused_in = ^in_data;

  always_ff @(posedge clk) begin
    if (rst) begin
      slot_q     <= 5'(NSLOT - 1);
      aligned_q  <= 1'b0;
      dout       <= '0;
      dout_slot  <= '0;
      dout_kind  <= SLOT_USER;
      dout_valid <= 1'b0;
    end else begin
      dout_valid <= active;
      if (active) begin
        aligned_q <= 1'b1;
        slot_q    <= slot_now;
        dout_slot <= slot_now;
        if (slot_now < 5'(USER_SLOTS)) begin
          dout      <= scr_data;
          dout_kind <= SLOT_USER;
        end else if (slot_now == 5'(USER_SLOTS)) begin
          dout      <= crc;
          dout_kind <= SLOT_CRC;
        end else begin
          dout      <= ctrl_byte;
          dout_kind <= SLOT_MARK;
        end
      end
    end
  end
endmodule
