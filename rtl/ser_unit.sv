// ser_unit: the 16:1 serializing unit of one serializer channel (Fig. 9).
//
// Four stages of 2:1 multiplexers form a binary tree: 16:8, 8:4, 4:2 and 2:1.
// Each stage is a register that, at the rate of its own divided clock,
// alternately takes the low and the high half of the word held by the stage
// before it. The clock dividers are one 4-bit counter c on the serial clock,
// and each stage is phased to take its input one bit period after the stage
// before it has changed, so no stage waits longer than it must:
//   16:8  at c = 15 takes din[7:0] (and keeps din[15:8]), at c = 7 the kept
//         high byte;
//   8:4   at c = 0, 4, 8, 12, the low or high nibble (c[2]);
//   4:2   at odd c, the low or high pair (c[1]);
//   2:1   every bit period, bit c[0].
// The result is bit 0 of the parallel word first, bit 15 last. The parallel
// word is sampled when the counter is 15 (load).
//
// The real circuit clocks its last stage on both edges of a half-rate clock
// (DDR) from the LC-PLL; here clk_ser is the full-rate bit clock, one bit per
// rising edge. The divided clocks are outputs: clk_div8 (640 MHz at
// 5.12 Gb/s, the LOC clock of the encoder) and clk_div16 (word clock).
// Latency: bit 0 of a word is on sout after the third clk_ser edge following
// the sampling edge, bit i after the (3+i)-th. The tree, stage widths and clock dividers follow the source; the
// counter-based dividers and the bit order are this design's choices.
module ser_unit (
  input  logic        clk_ser,
  input  logic        rst,
  input  logic [15:0] din,
  output logic        sout,
  output logic        clk_div8,
  output logic        clk_div16,
  output logic        load      // high in the clk_ser cycle that samples din
);
  logic [3:0]  c;
  logic [7:0]  hi;
  logic [7:0]  r1;
  logic [3:0]  r2;
  logic [1:0]  r3;

  assign load      = c == 4'hF;
  assign clk_div8  = c[2];
  assign clk_div16 = c[3];

  always_ff @(posedge clk_ser) begin
    if (rst) begin
      c  <= '0;
      hi <= '0;
      r1 <= '0;
      r2 <= '0;
      r3 <= '0;
      sout <= 1'b0;
    end else begin
      c <= c + 1'b1;
      if (c == 4'hF)      hi <= din[15:8];                      // high byte kept
      if (c[2:0] == 3'h7) r1 <= c[3] ? din[7:0] : hi;           // 16:8
      if (c[1:0] == 2'h0) r2 <= c[2] ? r1[7:4]  : r1[3:0];      // 8:4
      if (c[0])           r3 <= c[1] ? r2[3:2]  : r2[1:0];      // 4:2
      sout <= c[0] ? r3[1] : r3[0];                              // 2:1
    end
  end
endmodule
