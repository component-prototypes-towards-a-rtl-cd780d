// scrambler: self-synchronous scrambler of the LOCic user data, which keeps
// the serial stream DC balanced.
//
// Each scrambled bit is s[n] = d[n] ^ s[n-39] ^ s[n-58] over the stream of
// user bits (lane 0 first within a slot); control slots are not scrambled and
// do not advance it. The 58-bit history is kept across frames, so the
// receiver's descrambler recovers the data after 58 bits without any reset
// being shared between the two ends. The scrambled byte is combinational;
// the history advances at each pulse of scr_en (the "SCR Clk").
//
// The source says only that the user data are scrambled for DC balance; the
// polynomial and the self-synchronous form are this design's choices.
module scrambler
  import locic_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       scr_en,
  input  logic [7:0] data,
  output logic [7:0] scr_data
);
  logic [SCR_LEN-1:0] st;
  logic [SCR_LEN-1:0] st_next;

  always_comb {st_next, scr_data} = scramble8(st, data);

  always_ff @(posedge clk) begin
    if (rst)         st <= '0;
    else if (scr_en) st <= st_next;
  end
endmodule
