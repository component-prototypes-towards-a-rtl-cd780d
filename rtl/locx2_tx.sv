// locx2_tx: the two-channel transmitter (LOCx2): per channel a LOCic encoder
// and a 16:1 serializing unit, both channels running from one serial clock.
//
// The serial clock (from the LC-PLL, not modelled) drives both serializers.
// Each serializer's divide-by-8 output is the 640 MHz LOC clock of its
// encoder, as in the source, where the encoder clock is the serializer clock
// divided down. A two-word gearbox on the LOC clock joins each even/odd pair
// of 8-bit encoder slots into one 16-bit word (even slot in the low byte) for
// the serializer, whose 16:8 stage sends the low byte first, so the serial
// stream carries the slots in order, lane 0 first. The gearbox word changes
// at a LOC clock edge, 4 bit periods before or 4 after the serializer samples it.
//
// At 5.12 Gb/s a 128-bit frame is 8 serializer words. From D0 entering the
// encoder to its first bit on sout takes at most 3 LOC cycles (encoder) +
// 2 LOC cycles (gearbox) + 12 bit periods (until the serializer's next load)
// + 3 bit periods (tree) = 55 bit periods, 10.74 ns; 9.0-10.2 ns measured
// over random clock phases, within the source's estimate of 10.9 ns for its
// two-channel chip.
//
// Reset: rst is synchronous to clk_ser. The LOC clock stands still while the
// serializer's divider is in reset, so each channel's LOC-domain reset is
// asserted asynchronously by rst and released two LOC clock edges after it:
// rst is used both ways on purpose. data_rst resets the FIFO write side.
module locx2_tx
  import locic_pkg::*;
#(
  parameter int unsigned NCH        = 2,
  parameter int unsigned USER_SLOTS = locic_pkg::DEF_USER_SLOTS
) (
  input  logic            clk_ser,
  input  logic            rst,        // synchronous to clk_ser
  input  logic            data_clk,
  input  logic            data_rst,
  input  logic [NCH-1:0][7:0] din,
  input  logic            frame_clk,
  input  logic            bc_reset,
  output logic [NCH-1:0]  sout,
  output logic [NCH-1:0]  loc_clk
);
  for (genvar ch = 0; ch < NCH; ch++) begin : g_ch
    logic [7:0]  enc_data;
    logic [4:0]  enc_slot;
    slot_kind_e  enc_kind;
    logic        enc_valid;
    logic [7:0]  lo_byte;
    logic [15:0] word;
    logic        clk8, clk16, load;
    logic        rst_loc;
    logic [1:0]  rst_sync;

    ser_unit u_ser (
      .clk_ser(clk_ser), .rst(rst), .din(word), .sout(sout[ch]),
      .clk_div8(clk8), .clk_div16(clk16), .load(load));

    // Reset of the LOC clock domain: asserted at once (clk8 stands still while
    // the serializer is in reset), released two LOC clock edges after rst.
    always_ff @(posedge clk8 or posedge rst) begin
      if (rst) rst_sync <= 2'b11;
      else     rst_sync <= {rst_sync[0], 1'b0};
    end
    assign rst_loc = rst_sync[1];

    locic_encoder #(.USER_SLOTS(USER_SLOTS)) u_enc (
      .data_clk(data_clk), .data_rst(data_rst), .din(din[ch]), .frame_clk(frame_clk),
      .clk(clk8), .rst(rst_loc), .bc_reset(bc_reset),
      .dout(enc_data), .dout_slot(enc_slot), .dout_kind(enc_kind), .dout_valid(enc_valid));

    // Gearbox: two 8-bit slots -> one 16-bit serializer word.
    always_ff @(posedge clk8) begin
      if (rst_loc) begin
        lo_byte <= '0;
        word    <= '0;
      end else if (enc_valid) begin
        if (!enc_slot[0]) lo_byte <= enc_data;
        else              word    <= {enc_data, lo_byte};
      end
    end

    assign loc_clk[ch] = clk8;

    logic unused;
    assign unused = clk16 ^ load ^ ^enc_kind;
  end
endmodule
