// bcid_gen: rebuilds the 12-bit bunch-crossing identifier from the 4-bit PRBS
// fields of the current and the two previous frames.
//
// The transmitter's 12-bit LFSR moves four steps per frame and sends the four
// new bits, so the last three fields, oldest in the top bits, are the LFSR
// state itself. The field is also predictable from that state, which makes it
// a second check of the frame boundary: bcid_valid is high when three fields
// have been seen in a row and the newest one equals the prediction.
// Two rx_clk cycles from field_valid to bcid/bcid_valid (stage 1: history and
// prediction check, stage 2: output), the two cycles of the source, which
// match descrambler plus CRC checker. bcid is the LFSR state, not a binary
// count; the LFSR is this design's choice.
module bcid_gen
  import locic_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic [3:0]  field,
  input  logic        field_valid,
  input  logic        locked,
  output logic [11:0] bcid,
  output logic        bcid_valid,
  output logic        bcid_strobe   // bcid updated this cycle
);
  logic [11:0] hist;
  logic [1:0]  seen;
  logic        pred_ok, stb1;
  logic [11:0] next_state;
  logic [3:0]  pred;

  assign next_state = prbs_step4(hist);
  assign pred       = next_state[3:0];

  always_ff @(posedge clk) begin
    if (rst || !locked) begin
      hist        <= '0;
      seen        <= '0;
      pred_ok     <= 1'b0;
      stb1        <= 1'b0;
      bcid        <= '0;
      bcid_valid  <= 1'b0;
      bcid_strobe <= 1'b0;
    end else begin
      stb1 <= field_valid;
      if (field_valid) begin
        hist    <= {hist[7:0], field};
        pred_ok <= (seen == 2'd3) && (pred == field);
        if (seen != 2'd3) seen <= seen + 1'b1;
      end
      bcid_strobe <= stb1;
      if (stb1) begin
        bcid       <= hist;
        bcid_valid <= pred_ok;
      end
    end
  end
endmodule
