// descrambler: undoes the transmitter's self-synchronous scrambler
// (d[n] = s[n] ^ s[n-39] ^ s[n-58]) on the 16-bit user words of a frame.
//
// The history advances over user words only (index < FW-1); the control word
// passes unchanged, as it was never scrambled. Because the descrambler feeds
// on received bits only, it is correct 58 user bits after lock, with no reset
// shared with the transmitter. One rx_clk cycle, registered; index, valid and
// marker flag travel alongside. Polynomial: this design's choice (the source
// names the descrambler and its one-cycle latency only).
module descrambler
  import locic_pkg::*;
#(
  parameter int unsigned FW = (locic_pkg::DEF_FRAME_SLOTS) / 2
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [15:0] din,
  input  logic [3:0]  din_idx,
  input  logic        din_valid,
  output logic [15:0] dout,
  output logic [3:0]  dout_idx,
  output logic        dout_valid
);
  logic [SCR_LEN-1:0] st, st_next;
  logic [15:0]        d;
  logic               user;

  assign user = din_idx != 4'(FW - 1);
  always_comb {st_next, d} = descramble16(st, din);

  always_ff @(posedge clk) begin
    if (rst) begin
      st         <= '0;
      dout       <= '0;
      dout_idx   <= '0;
      dout_valid <= 1'b0;
    end else begin
      if (din_valid && user) st <= st_next;
      dout       <= user ? d : din;
      dout_idx   <= din_idx;
      dout_valid <= din_valid;
    end
  end
endmodule
