// tb_locic_decoder: feeds the decoder with 16-bit words cut from a stream of
// reference-encoded frames that starts at a random bit offset, so the
// synchronizer has to slip bits to find the boundary. Checks, frame by frame:
//   - frame_end comes 5 word clocks after the word holding the frame's last
//     bit is sampled (3 sync/extract + 1 descramble + 1 CRC);
//   - user data equal the lane data sent, CRC flag clear, BCID equal to the
//     transmitter's LFSR state, for every frame after the first locked one;
//   - a frame with one flipped bit raises the CRC flag;
//   - after extra bits shift the stream, lock is lost and found again.
// Counts each mechanism (bit slip, lock, CRC error, relock, BCID valid) and
// fails if one never happened.
module tb_locic_decoder;
  import tb_ref_pkg::*;
  localparam int NF = 400;
  localparam int FW = 8;
  localparam int LAT = 4;   // edges after the one that samples the last word
  logic clk = 1'b0, rst = 1'b1;
  logic [15:0] din = '0, data;
  logic [3:0] data_idx;
  logic frame_flag, frame_end, crc_flag, bcid_valid, locked;
  logic [11:0] bcid;
  logic [7:0] slips;
  int checks = 0, failures = 0;
  int n_crc_err = 0, n_relock = 0, n_lock = 0, n_bcid = 0, n_good = 0;
  stream_gen g;
  int shift_frame, err_frame;

  locic_decoder dut (.clk(clk), .rst(rst), .din(din), .data(data), .data_idx(data_idx),
    .frame_flag(frame_flag), .frame_end(frame_end), .crc_flag(crc_flag), .bcid(bcid),
    .bcid_valid(bcid_valid), .locked(locked), .slips(slips));

  always #5 clk = ~clk;

  initial begin
    repeat (NF * FW + 20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("%0t %s", $time, what);
    end
  endtask

  // Monitor.
  int edge_no = -1;
  logic [15:0] got[FW];
  int prev_end_frame = -10;
  bit was_locked = 1'b0;
  always @(posedge clk) begin
    edge_no++;
    #1;
    if (locked && !was_locked) begin
      n_lock++;
      if (n_lock > 1) n_relock++;
    end
    was_locked = locked;
    if (frame_flag) got[data_idx] = data;
    if (frame_end) begin
      int f;
      f = -1;
      for (int i = 0; i < g.last_bit.size(); i++)
        if (g.last_bit[i] / 16 + 2 + LAT == edge_no) f = i;
      chk(f >= 0, $sformatf("frame_end at edge %0d matches no frame end", edge_no));
      if (f >= 0) begin
        if (!frame_flag) begin
          f = -10;                      // frame not valid: nothing to check
        end else if (prev_end_frame == f - 1) begin
          // Not the first frame after lock: everything must be right.
          n_good++;
          chk(crc_flag == g.err[f], $sformatf("frame %0d crc_flag %0b", f, crc_flag));
          if (g.err[f]) n_crc_err += crc_flag;
          if (!g.err[f])
            for (int k = 0; k < FW - 1; k++)
              chk(got[k] == g.user_words[f][k],
                  $sformatf("frame %0d word %0d: %04h expected %04h", f, k, got[k],
                            g.user_words[f][k]));
          if (bcid_valid) begin
            n_bcid++;
            chk(bcid == g.bcid[f], $sformatf("frame %0d bcid %03h expected %03h", f, bcid,
                                              g.bcid[f]));
          end
        end
        prev_end_frame = f;
      end
    end
  end

  initial begin
    g = new(14);
    g.junk($urandom_range(1, 127));
    shift_frame = 200;
    err_frame = 100;
    for (int f = 0; f < NF; f++) begin
      if (f == shift_frame) g.junk(5);
      g.add_frame((f == err_frame || f == err_frame + 30) ? $urandom_range(16, 40) : -1);
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int i = 0; i < g.bits.size() / 16; i++) begin
      din = g.word(i);
      @(negedge clk);
    end
    repeat (10) @(negedge clk);
    chk(slips > 0, "no bit slip happened");
    chk(n_lock > 0, "never locked");
    chk(n_relock > 0, "never relocked after the stream shift");
    chk(n_crc_err == 2, $sformatf("%0d of 2 injected errors flagged", n_crc_err));
    chk(n_bcid > 100, $sformatf("bcid valid in only %0d frames", n_bcid));
    chk(n_good > NF - 40, $sformatf("only %0d frames checked", n_good));
    $display("slips %0d locks %0d relocks %0d crc errors %0d bcid valid %0d frames checked %0d",
             slips, n_lock, n_relock, n_crc_err, n_bcid, n_good);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
