// loc_link_top: the digital content of the low-latency uplink: a two-channel
// LOCx2 transmitter (encoder + serializer per channel), one receiver per
// channel (deserializer + LOCic decoder), and the TMR configuration register
// of the LOCld1 VCSEL driver of each channel of the MTx module.
//
// What lies between is analog or optical and is not modelled: the LVDS
// receivers, the LC-PLL (its serial clock is the clk_ser input), the CML
// drivers, the LOCld1 drive stages and DACs, the VCSELs, the fiber, and the
// photodiode/TIA. So the serial outputs leave as tx_serial and the receivers
// take rx_serial, with the recovered bit clock rx_clk_ser in place of the
// receiving transceiver's clock recovery. The LOCld1 I2C slave is an outside
// design; its byte writes come in on cfg_*, and the DAC codes go out.
//
// Clocks: clk_ser (transmit bit clock, 5.12 GHz for full rate), data_clk
// (ADC word clock, same word rate as the 640 MHz LOC clock), frame_clk
// (40 MHz frame clock, as a level in the data_clk domain), rx_clk_ser
// (receive bit clock), cfg_clk. Resets are active high. rst, data_rst,
// rx_rst and cfg_rst are synchronous to their clocks; the word-clock domain
// of each receiver (rx_clk, the bit clock divided by 16) stands still while
// its deserializer is in reset, so its reset is asserted asynchronously from
// rx_rst and released two rx_clk edges later. rx_rst is therefore used both
// synchronously (deserializer) and asynchronously (that synchronizer), on
// purpose; likewise rst inside the transmitter.
//
// Timing (5.12 Gb/s): D0 of a frame enters the transmitter and its first bit
// leaves on tx_serial 9-10.7 ns later; the receiver delivers a frame's
// frame_end/crc_flag/bcid 5 rx_clk cycles after the word holding the frame's
// last bit is deserialized. Locking takes a few frames per bit slipped.
module loc_link_top
  import locic_pkg::*;
#(
  parameter int unsigned NCH        = 2,
  parameter int unsigned USER_SLOTS = locic_pkg::DEF_USER_SLOTS
) (
  // transmitter
  input  logic                 clk_ser,
  input  logic                 rst,
  input  logic                 data_clk,
  input  logic                 data_rst,
  input  logic [NCH-1:0][7:0]  din,
  input  logic                 frame_clk,
  input  logic                 bc_reset,
  output logic [NCH-1:0]       tx_serial,
  output logic [NCH-1:0]       loc_clk,
  // receiver
  input  logic                 rx_clk_ser,
  input  logic                 rx_rst,
  input  logic [NCH-1:0]       rx_serial,
  output logic [NCH-1:0]       rx_clk,
  output logic [NCH-1:0][15:0] rx_data,
  output logic [NCH-1:0][3:0]  rx_data_idx,
  output logic [NCH-1:0]       rx_frame_flag,
  output logic [NCH-1:0]       rx_frame_end,
  output logic [NCH-1:0]       rx_crc_flag,
  output logic [NCH-1:0][11:0] rx_bcid,
  output logic [NCH-1:0]       rx_bcid_valid,
  output logic [NCH-1:0]       rx_locked,
  output logic [NCH-1:0][7:0]  rx_slips,
  // LOCld1 configuration (one driver per channel)
  input  logic                 cfg_clk,
  input  logic                 cfg_rst,
  input  logic [NCH-1:0]       cfg_wr_en,
  input  logic                 cfg_addr,
  input  logic [7:0]           cfg_wr_data,
  output logic [NCH-1:0][7:0]  cfg_rd_data,
  output logic [NCH-1:0][4:0]  ld_mod_code,
  output logic [NCH-1:0][5:0]  ld_bias_code,
  output logic [NCH-1:0][4:0]  ld_peak_code,
  output logic [NCH-1:0]       ld_seu_seen
);
  locx2_tx #(.NCH(NCH), .USER_SLOTS(USER_SLOTS)) u_tx (
    .clk_ser(clk_ser), .rst(rst), .data_clk(data_clk), .data_rst(data_rst), .din(din),
    .frame_clk(frame_clk), .bc_reset(bc_reset), .sout(tx_serial), .loc_clk(loc_clk));

  for (genvar ch = 0; ch < NCH; ch++) begin : g_rx
    logic [15:0] word;
    logic        rclk, rrst;
    logic [1:0]  rrst_sync;

    deser u_deser (
      .clk_ser(rx_clk_ser), .rst(rx_rst), .sin(rx_serial[ch]), .dout(word), .rx_clk(rclk));

    // Decoder reset: asserted at once (rx_clk stands still while the
    // deserializer is in reset), released two word clocks after rx_rst.
    always_ff @(posedge rclk or posedge rx_rst) begin
      if (rx_rst) rrst_sync <= 2'b11;
      else        rrst_sync <= {rrst_sync[0], 1'b0};
    end
    assign rrst = rrst_sync[1];

    locic_decoder #(.USER_SLOTS(USER_SLOTS)) u_dec (
      .clk(rclk), .rst(rrst), .din(word), .data(rx_data[ch]), .data_idx(rx_data_idx[ch]),
      .frame_flag(rx_frame_flag[ch]), .frame_end(rx_frame_end[ch]), .crc_flag(rx_crc_flag[ch]),
      .bcid(rx_bcid[ch]), .bcid_valid(rx_bcid_valid[ch]), .locked(rx_locked[ch]),
      .slips(rx_slips[ch]));

    assign rx_clk[ch] = rclk;

    locld1_regs u_ld1 (
      .clk(cfg_clk), .rst(cfg_rst), .wr_en(cfg_wr_en[ch]), .addr(cfg_addr),
      .wr_data(cfg_wr_data), .rd_data(cfg_rd_data[ch]), .mod_code(ld_mod_code[ch]),
      .bias_code(ld_bias_code[ch]), .peak_code(ld_peak_code[ch]), .seu_seen(ld_seu_seen[ch]));
  end
endmodule
