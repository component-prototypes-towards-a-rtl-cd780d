// locic_pkg: constants and bit-level functions shared by the LOCic encoder
// (transmitter) and the matching decoder (receiver).
//
// Frame format (Fig. 11 of the source design): 8 ADC lanes, one bit per lane
// per slot. A frame has USER_SLOTS user slots (D0-D13, 14 with the two
// calibration bits) followed by two control slots. In a slot, bit i belongs to
// lane i. Control slot 0 carries the CRC (T0-T7, lane i = Ti), control slot 1
// carries T8-T15: the frame marker "1010" on lanes 0-3 (T8=1, T9=0, T10=1,
// T11=0) and the 4-bit BCID field on lanes 4-7 (T12 on lane 4).
//
// The serial bit order, used by the scrambler, CRC and the receiver, is
// slot-major, lane 0 first: user bit n = 8*slot + lane.
//
// From the source: CRC polynomial x^8+x^5+x^3+x^2+x+1, the 1010 marker, a
// PRBS-derived 4-bit BCID field, 14 user slots and 2 control slots.
// Own choices: CRC initial value 0 and bit order; the scrambler polynomial
// (self-synchronous x^58+x^39+1); the PRBS (12-bit Fibonacci LFSR
// x^12+x^6+x^4+x+1, advanced 4 steps per frame, seed all ones).
package locic_pkg;

  localparam int unsigned DEF_USER_SLOTS  = 14;  // D0-D13 (default)
  localparam int unsigned CTRL_SLOTS   = 2;   // T0-T7, T8-T15
  localparam int unsigned DEF_FRAME_SLOTS = DEF_USER_SLOTS + CTRL_SLOTS;

  localparam logic [7:0]  CRC_POLY     = 8'h2F;  // x^8+x^5+x^3+x^2+x+1
  localparam logic [7:0]  CRC_INIT     = 8'h00;
  localparam logic [3:0]  FRAME_MARKER = 4'b0101; // {T11,T10,T9,T8} = 0,1,0,1 -> "1010" in T8..T11 order
  localparam int unsigned SCR_LEN      = 58;     // scrambler x^58 + x^39 + 1
  localparam int unsigned SCR_TAP      = 39;
  localparam logic [11:0] PRBS_SEED    = 12'hFFF;

  // Kind of the slot a word belongs to.
  typedef enum logic [1:0] {SLOT_USER = 2'd0, SLOT_CRC = 2'd1, SLOT_MARK = 2'd2} slot_kind_e;

  // CRC-8, one bit at a time, MSB-first register, bit 0 of the data first.
  function automatic logic [7:0] crc8_bits(input logic [7:0] crc_in, input logic [15:0] data,
                                           input int unsigned nbits);
    logic [7:0] c;
    c = crc_in;
    for (int unsigned i = 0; i < 16; i++) begin
      if (i < nbits) begin
        if (c[7] ^ data[i]) c = {c[6:0], 1'b0} ^ CRC_POLY;
        else                c = {c[6:0], 1'b0};
      end
    end
    return c;
  endfunction

  // Self-synchronous scrambler: s[n] = d[n] ^ s[n-39] ^ s[n-58].
  // st[0] holds s[n-1], st[k] holds s[n-1-k]. Bit 0 of data first.
  function automatic logic [SCR_LEN+7:0] scramble8(input logic [SCR_LEN-1:0] st_in,
                                                   input logic [7:0] d);
    logic [SCR_LEN-1:0] st;
    logic [7:0] s;
    st = st_in;
    for (int i = 0; i < 8; i++) begin
      s[i] = d[i] ^ st[SCR_TAP-1] ^ st[SCR_LEN-1];
      st   = {st[SCR_LEN-2:0], s[i]};
    end
    return {st, s};   // {next state, scrambled byte}
  endfunction

  // Inverse of the scrambler on a 16-bit word: d[n] = s[n] ^ s[n-39] ^ s[n-58].
  function automatic logic [SCR_LEN+15:0] descramble16(input logic [SCR_LEN-1:0] st_in,
                                                       input logic [15:0] s);
    logic [SCR_LEN-1:0] st;
    logic [15:0] d;
    st = st_in;
    for (int i = 0; i < 16; i++) begin
      d[i] = s[i] ^ st[SCR_TAP-1] ^ st[SCR_LEN-1];
      st   = {st[SCR_LEN-2:0], s[i]};
    end
    return {st, d};
  endfunction

  // 12-bit Fibonacci LFSR, x^12+x^6+x^4+x+1, advanced four steps. The four new
  // bits end up in [3:0], so three successive fields rebuild the whole state.
  function automatic logic [11:0] prbs_step4(input logic [11:0] s_in);
    logic [11:0] s;
    s = s_in;
    for (int i = 0; i < 4; i++) s = {s[10:0], s[11] ^ s[5] ^ s[3] ^ s[0]};
    return s;
  endfunction

endpackage
