// data_extractor: realigns the deserialized 16-bit words to the frame
// boundary found by the sync controller (Fig. 13).
//
// Stage 1 keeps the current and the previous deserializer word; stage 2 cuts
// the 16-bit window starting at bit offset `offset` out of the 32 bits
// {current, previous} (a barrel shifter, the bit slip); stage 3 registers the
// aligned word together with its index in the frame and the lock flag, which
// the sync controller supplies for the word in stage 2. The stage-2 word is
// also handed to the sync controller, which looks for the marker in it.
// Latency: 3 rx_clk cycles from a deserializer word to dout, the 3 cycles the
// source gives for synchronizer and data extractor, which run side by side.
module data_extractor (
  input  logic        clk,
  input  logic        rst,
  input  logic [15:0] din,
  input  logic [3:0]  offset,
  input  logic [3:0]  idx_in,      // frame index of the stage-2 word
  input  logic        locked_in,   // stage-2 word belongs to a locked frame
  output logic [15:0] aligned,     // stage-2 word, to the sync controller
  output logic [15:0] dout,
  output logic [3:0]  dout_idx,
  output logic        dout_valid
);
  logic [15:0] cur, prev;
  logic [31:0] window;

  assign window = {cur, prev};

  always_ff @(posedge clk) begin
    if (rst) begin
      cur        <= '0;
      prev       <= '0;
      aligned    <= '0;
      dout       <= '0;
      dout_idx   <= '0;
      dout_valid <= 1'b0;
    end else begin
      cur        <= din;
      prev       <= cur;
      aligned    <= window[{1'b0, offset} +: 16];
      dout       <= aligned;
      dout_idx   <= idx_in;
      dout_valid <= locked_in;
    end
  end
endmodule
