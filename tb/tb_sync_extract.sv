// tb_sync_extract: sync controller and data extractor wired as in the decoder
// and fed with words cut from a reference-encoded stream at a random bit
// offset. Checks that lock is reached after bit slips, that every word
// delivered while locked is the on-line word of the frame with its right index,
// 3 word clocks after the word holding its last bit is sampled, that the BCID
// field handed on is the frame's, and that lock is lost and found again when
// the stream is shifted by a few bits.
module tb_sync_extract;
  import tb_ref_pkg::*;
  localparam int NF = 300;
  localparam int FW = 8;
  logic clk = 1'b0, rst = 1'b1;
  logic [15:0] din = '0, aligned, dout;
  logic [3:0] offset, idx, dout_idx, field;
  logic locked_now, locked, field_valid, marker_ok, dout_valid;
  logic [7:0] slips;
  int checks = 0, failures = 0, nwords = 0, nlock = 0, nfield = 0;
  stream_gen g;

  data_extractor ext (.clk(clk), .rst(rst), .din(din), .offset(offset), .idx_in(idx),
    .locked_in(locked_now), .aligned(aligned), .dout(dout), .dout_idx(dout_idx),
    .dout_valid(dout_valid));

  sync_ctrl sync (.clk(clk), .rst(rst), .aligned(aligned), .offset(offset), .idx(idx),
    .locked_now(locked_now), .locked(locked), .bcid_field(field), .field_valid(field_valid),
    .marker_ok(marker_ok), .slips(slips));

  always #5 clk = ~clk;

  initial begin
    repeat (NF * FW + 20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected word: the 16 line bits of word k of the frame ending at the
  // word sampled 2 edges earlier (k = FW-1) or later for earlier words.
  int edge_no = -1;
  bit was_locked = 1'b0;
  always @(posedge clk) begin
    edge_no++;
    #1;
    if (locked && !was_locked) nlock++;
    was_locked = locked;
    // (words cut from the end of the stream, after the last frame, are skipped)
    if (dout_valid && edge_no < g.bits.size() / 16 - FW) begin
      int f, k, start;
      logic [15:0] e;
      f = -1;
      k = int'(dout_idx);
      // The frame whose word k ends in the deserializer word sampled at edge
      // edge_no - 2 (3 register stages: edges n, n+1, n+2).
      for (int i = 0; i < g.last_bit.size(); i++)
        if ((g.last_bit[i] - 16 * (FW - 1 - k)) / 16 + 2 + 2 == edge_no) f = i;
      checks++;
      if (f < 0) begin
        failures++;
        if (failures < 10) $display("edge %0d: word %0d matches no frame position", edge_no, k);
      end else begin
        start = g.last_bit[f] - 16 * FW + 1 + 16 * k;
        for (int b = 0; b < 16; b++) e[b] = g.bits[start + b];
        nwords++;
        // Words of a frame whose marker is gone (stream shifted) are not
        // expected to match until UNLOCK_N markers have been missed.
        if (f < 200 || f > 205) begin
          checks++;
          if (dout !== e) begin
            failures++;
            if (failures < 10) $display("frame %0d word %0d: %04h expected %04h", f, k, dout, e);
          end
        end
        if (field_valid) begin
          nfield++;
          checks++;
          if (k != FW - 1 || field !== e[15:12]) begin
            failures++;
            $display("frame %0d: field %h expected %h", f, field, e[15:12]);
          end
        end
      end
    end
  end

  initial begin
    g = new(14);
    g.junk($urandom_range(1, 127));
    for (int f = 0; f < NF; f++) begin
      if (f == 200) g.junk(3);
      g.add_frame();
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int i = 0; i < g.bits.size() / 16; i++) begin
      din = g.word(i);
      @(negedge clk);
    end
    repeat (10) @(negedge clk);
    checks++;
    if (slips == 0 || nlock != 2 || nwords < 8 * (NF - 40) || nfield < NF - 40) begin
      failures++;
      $display("slips %0d locks %0d words %0d fields %0d", slips, nlock, nwords, nfield);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
