// prbs_gen: PRBS generator of the LOCic encoder. It supplies the control byte
// T8-T15 of every frame: the fixed frame marker "1010" on lanes 0-3 and a
// 4-bit field of a pseudo-random sequence on lanes 4-7 (the BCID field).
//
// A 12-bit LFSR (x^12+x^6+x^4+x+1) is advanced four steps at each pulse of
// bcid_en (the "BCID Clk" from the frame builder, once per frame); the four
// new bits form the field. Because each frame carries four fresh bits of the
// sequence, a receiver rebuilds the whole 12-bit state, which serves as the
// bunch-crossing identifier, from three successive frames, and can predict
// the next field. bc_reset (the "Reset" input) returns the LFSR to its seed.
//
// Timing: ctrl_byte changes one cycle after bcid_en. The source gives the
// 4-bit width of the field, its PRBS origin and the 12-bit recovered BCID; the
// polynomial, seed and step count are this design's choices.
module prbs_gen
  import locic_pkg::*;
(
  input  logic       clk,
  input  logic       bc_reset,
  input  logic       bcid_en,
  output logic [7:0] ctrl_byte,   // {T15..T12 = BCID field, T11..T8 = 0101}
  output logic [11:0] state
);
  always_ff @(posedge clk) begin
    if (bc_reset)     state <= PRBS_SEED;
    else if (bcid_en) state <= prbs_step4(state);
  end

  assign ctrl_byte = {state[3:0], FRAME_MARKER};
endmodule
