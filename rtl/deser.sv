// deser: 1:16 deserializer of the receiver (Fig. 13).
//
// The serial stream is shifted in at the recovered bit clock; every 16 bits
// the shift register is copied to the parallel output, the first received bit
// in bit 0, and rx_clk (the bit clock divided by 16, "RxClkOut", 320 MHz at
// 5.12 Gb/s) clocks the decoder. The word boundary is wherever the counter
// happened to start; finding the frame boundary is the sync controller's job.
// dout changes when the counter wraps and is stable at the rising edge of
// rx_clk, half a word later.
//
// In the source this is the gigabit transceiver of the receiving FPGA, with
// clock and data recovery from a reference clock. Clock recovery is not
// modelled here: clk_ser must be the bit clock already aligned to the data.
module deser (
  input  logic        clk_ser,
  input  logic        rst,
  input  logic        sin,
  output logic [15:0] dout,
  output logic        rx_clk
);
  logic [3:0]  c;
  logic [15:0] sh;

  assign rx_clk = c[3];

  always_ff @(posedge clk_ser) begin
    if (rst) begin
      c    <= '0;
      sh   <= '0;
      dout <= '0;
    end else begin
      c  <= c + 1'b1;
      sh <= {sin, sh[15:1]};
      if (c == 4'hF) dout <= {sin, sh[15:1]};
    end
  end
endmodule
