// tb_ref_pkg: reference models used by the testbenches, written independently
// of the RTL: the CRC as polynomial long division over a bit array, the
// scrambler and the PRBS as explicit bit sequences, and a frame generator that
// builds the expected encoder output from the ADC lane words.
package tb_ref_pkg;

  // Remainder of M(x) * x^8 divided by x^8+x^5+x^3+x^2+x+1. msg[0] is the
  // first bit sent (the highest power of x).
  function automatic logic [7:0] crc_ref(input bit msg[], input int n);
    bit work[];
    bit [8:0] p;
    logic [7:0] r;
    p = 9'b1_0010_1111;
    work = new[n + 8];
    for (int i = 0; i < n + 8; i++) work[i] = (i < n) ? msg[i] : 1'b0;
    for (int i = 0; i < n; i++)
      if (work[i]) for (int j = 0; j < 9; j++) work[i + j] ^= p[8 - j];
    for (int j = 0; j < 8; j++) r[7 - j] = work[n + j];
    return r;
  endfunction

  // Scrambler reference: the whole scrambled history is kept in a queue.
  class scr_model;
    bit hist[$];
    function bit scr_bit(bit d);
      int n;
      bit a, b, s;
      n = hist.size();
      a = (n >= 39) ? hist[n - 39] : 1'b0;
      b = (n >= 58) ? hist[n - 58] : 1'b0;
      s = d ^ a ^ b;
      hist.push_back(s);
      return s;
    endfunction
    function logic [7:0] scr_byte(logic [7:0] d);
      logic [7:0] r;
      for (int i = 0; i < 8; i++) r[i] = scr_bit(d[i]);
      return r;
    endfunction
  endclass

  // PRBS reference: a[n] = a[n-1] ^ a[n-4] ^ a[n-6] ^ a[n-12], twelve ones
  // before the start. Field of frame k (k = 0 after reset) holds
  // {a[4k-4], a[4k-3], a[4k-2], a[4k-1]} in bits 3..0.
  class prbs_model;
    bit a[$];
    function new();
      for (int i = 0; i < 12; i++) a.push_back(1'b1);
    endfunction
    function void reset();
      a.delete();
      for (int i = 0; i < 12; i++) a.push_back(1'b1);
    endfunction
    // State before the step: the twelve newest bits, newest in bit 0.
    function logic [11:0] state();
      logic [11:0] s;
      int n;
      n = a.size();
      for (int i = 0; i < 12; i++) s[i] = a[n - 1 - i];
      return s;
    endfunction
    function void step4();
      int n;
      for (int k = 0; k < 4; k++) begin
        n = a.size();
        a.push_back(a[n - 1] ^ a[n - 4] ^ a[n - 6] ^ a[n - 12]);
      end
    endfunction
  endclass

  // Expected 16 encoder output bytes of one frame, from its 14 lane words.
  class frame_model;
    scr_model  scr;
    prbs_model prbs;
    int        user_slots;
    function new(int us = 14);
      scr = new();
      prbs = new();
      user_slots = us;
    endfunction
    function void build(input logic [7:0] d[], output logic [7:0] o[]);
      bit msg[];
      logic [11:0] s;
      o = new[user_slots + 2];
      msg = new[8 * user_slots];
      for (int k = 0; k < user_slots; k++) begin
        for (int i = 0; i < 8; i++) msg[8 * k + i] = d[k][i];
        o[k] = scr.scr_byte(d[k]);
      end
      o[user_slots] = crc_ref(msg, 8 * user_slots);
      s = prbs.state();
      o[user_slots + 1] = {s[3:0], 4'b0101};
      prbs.step4();
    endfunction
  endclass

  // Serial stream of encoded frames for the receiver testbenches: random lane
  // data go through frame_model; the frame bytes are laid out slot by slot,
  // lane 0 first. Per frame it keeps the position of its last bit, the user
  // data as the decoder delivers them (16-bit words, even slot in the low
  // byte), the expected BCID (LFSR state) and whether an error was injected.
  class stream_gen;
    frame_model fm;
    bit         bits[$];
    int         last_bit[$];
    logic [15:0] user_words[$][];
    logic [11:0] bcid[$];
    bit          err[$];
    int          us;
    function new(int user_slots = 14);
      us = user_slots;
      fm = new(user_slots);
    endfunction
    function void junk(int n);
      for (int i = 0; i < n; i++) bits.push_back(1'($urandom));
    endfunction
    // Append one frame; flip_bit >= 0 flips that bit of the frame on the line.
    function void add_frame(int flip_bit = -1);
      logic [7:0] d[];
      logic [7:0] o[];
      logic [15:0] w[];
      logic [11:0] st;
      d = new[us];
      for (int k = 0; k < us; k++) d[k] = 8'($urandom);
      st = fm.prbs.state();
      fm.build(d, o);
      w = new[us / 2];
      for (int k = 0; k < us / 2; k++) w[k] = {d[2 * k + 1], d[2 * k]};
      for (int k = 0; k < us + 2; k++)
        for (int i = 0; i < 8; i++)
          bits.push_back(o[k][i] ^ (flip_bit == 8 * k + i));
      last_bit.push_back(bits.size() - 1);
      user_words.push_back(w);
      bcid.push_back(st);
      err.push_back(flip_bit >= 0);
    endfunction
    function logic [15:0] word(int i);
      logic [15:0] r;
      for (int b = 0; b < 16; b++) r[b] = (16 * i + b < bits.size()) ? bits[16 * i + b] : 1'b0;
      return r;
    endfunction
  endclass
endpackage
