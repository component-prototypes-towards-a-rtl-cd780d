// sync_fifo: clock-domain crossing of the encoder input, from the ADC data
// clock to the 640 MHz LOC clock (the "Sync FIFO" of the LOCic encoder).
//
// The two clocks have the same word rate and an unknown but fixed phase (both
// are derived from the LHC bunch clock), so the FIFO is a small ring buffer
// with free-running pointers and no full/empty flags. The write side stores
// one 8-lane word per data-clock edge, tagged with a start-of-frame bit taken
// from the rising edge of the 40 MHz frame clock. The read side starts once a
// "writing" flag has crossed a two-flop synchronizer, with its pointer one
// entry behind, and then reads one entry per LOC clock. A word therefore
// spends between 1 and 2 LOC clock cycles in the FIFO, the figure the source
// gives; which value within that range depends on the clock phase at start-up.
//
// The word written in the first data-clock cycle after reset is not read.
//
// Interface: wclk domain: din (bit i = lane i), frame_clk (level, high in the
// first half of a frame, so its rising edge marks D0). rclk domain: dout,
// dout_sof, dout_valid (registered, one word per cycle once running).
//
// Own choices: single-data-rate input at the word rate (the source shows a
// double-data-rate data clock in its frame figure and labels it 240 MHz in its
// block diagram); depth 4; start-up scheme.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic             wclk,
  input  logic             wrst,
  input  logic [WIDTH-1:0] din,
  input  logic             frame_clk,
  input  logic             rclk,
  input  logic             rrst,
  output logic [WIDTH-1:0] dout,
  output logic             dout_sof,
  output logic             dout_valid
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH:0]  mem [DEPTH];
  logic [AW-1:0]   wptr, rptr;
  logic            fclk_q, writing;
  logic            sof_w;
  logic [1:0]      start_sync;

  // Write side.
  assign sof_w = frame_clk & ~fclk_q;

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wptr    <= '0;
      fclk_q  <= 1'b1;
      writing <= 1'b0;
    end else begin
      fclk_q        <= frame_clk;
      mem[wptr]     <= {sof_w, din};
      wptr          <= wptr + 1'b1;
      writing       <= 1'b1;
    end
  end

  // Read side.
  always_ff @(posedge rclk) begin
    if (rrst) begin
      start_sync <= '0;
      rptr       <= AW'(1);
      dout       <= '0;
      dout_sof   <= 1'b0;
      dout_valid <= 1'b0;
    end else begin
      start_sync <= {start_sync[0], writing};
      if (start_sync[1]) begin
        {dout_sof, dout} <= mem[rptr];
        dout_valid       <= 1'b1;
        rptr             <= rptr + 1'b1;
      end
    end
  end
endmodule
