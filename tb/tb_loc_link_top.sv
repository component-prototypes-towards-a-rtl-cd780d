// tb_loc_link_top: end-to-end test of the link at its default size (two
// channels, 14 user slots, full 5.12 Gb/s bit rate): random ADC lane data go
// into the transmitter, each serial line runs through a delay of a random
// number of bit times (the fiber) into the receiver, and the receiver output is
// checked against what was sent.
//
// How: the receive bit clock is the transmit bit clock (ideal clock recovery);
// the delay line sets where in the 16-bit words the frames start, so the
// receivers must slip to the boundary. During the run:
//   - the line delay of both channels changes (stream shift): lock is lost and
//     found again;
//   - single line bits are inverted: the CRC flag must rise for the frame(s)
//     they hit, and at no other time;
//   - the bunch-crossing counter is reset: the recovered BCID must restart
//     from the seed sequence;
//   - the LOCld1 registers are written, read back, and one copy is upset.
// Every received frame with frame_flag and a clear CRC flag is looked up by
// its first four bytes in the frames sent on that channel; all its 14 bytes
// must match, and its BCID (when valid) must be the transmitter's counter
// state for that frame. Counts each mechanism (bit slip, lock, relock, CRC
// error, BCID valid, BCID restart, register write/readback, upset correction)
// and fails if one never happened. Prints the link latency without the fiber:
// from D0 entering the transmitter to the frame's frame_end at the receiver.
`timescale 1ps/1fs
module tb_loc_link_top;
  import tb_ref_pkg::*;
  localparam int NCH = 2;
  localparam int NF = 300;                 // frames sent
  localparam int SHIFT_F = 100;            // frame at which the line delay changes
  localparam int ERR_F[2] = '{60, 170};    // frames during which a bit is flipped
  localparam int BCR_F = 220;              // frame during which bc_reset is high
  localparam int US = 14;                  // user slots per frame
  localparam int FS = US + 2;              // slots per frame
  localparam int FB = 8 * FS;              // bits per frame
  localparam realtime TBIT = 25000.0 / FB; // one frame per 25 ns: 5.12 Gb/s

  logic clk_ser = 1'b0, rst = 1'b0, rx_rst = 1'b0;
  logic data_clk = 1'b0, data_rst = 1'b1, bc_reset = 1'b1, frame_clk = 1'b0;
  logic [NCH-1:0][7:0] din = '0;
  logic [NCH-1:0] tx_serial, loc_clk, rx_serial, rx_clk;
  logic [NCH-1:0][15:0] rx_data;
  logic [NCH-1:0][3:0] rx_data_idx;
  logic [NCH-1:0] rx_frame_flag, rx_frame_end, rx_crc_flag, rx_bcid_valid, rx_locked;
  logic [NCH-1:0][11:0] rx_bcid;
  logic [NCH-1:0][7:0] rx_slips;
  logic cfg_clk = 1'b0, cfg_rst = 1'b1, cfg_addr = 1'b0;
  logic [NCH-1:0] cfg_wr_en = '0;
  logic [7:0] cfg_wr_data = '0;
  logic [NCH-1:0][7:0] cfg_rd_data;
  logic [NCH-1:0][4:0] ld_mod_code, ld_peak_code;
  logic [NCH-1:0][5:0] ld_bias_code;
  logic [NCH-1:0] ld_seu_seen;

  int checks = 0, failures = 0;
  int n_lock = 0, n_relock = 0, n_crc = 0, n_bcid = 0, n_bcid_restart = 0, n_frames = 0;
  int n_cfg = 0, n_seu = 0;

  loc_link_top dut (
    .clk_ser(clk_ser), .rst(rst), .data_clk(data_clk), .data_rst(data_rst), .din(din),
    .frame_clk(frame_clk), .bc_reset(bc_reset), .tx_serial(tx_serial), .loc_clk(loc_clk),
    .rx_clk_ser(clk_ser), .rx_rst(rx_rst), .rx_serial(rx_serial), .rx_clk(rx_clk),
    .rx_data(rx_data), .rx_data_idx(rx_data_idx), .rx_frame_flag(rx_frame_flag),
    .rx_frame_end(rx_frame_end), .rx_crc_flag(rx_crc_flag), .rx_bcid(rx_bcid),
    .rx_bcid_valid(rx_bcid_valid), .rx_locked(rx_locked), .rx_slips(rx_slips),
    .cfg_clk(cfg_clk), .cfg_rst(cfg_rst), .cfg_wr_en(cfg_wr_en), .cfg_addr(cfg_addr),
    .cfg_wr_data(cfg_wr_data), .cfg_rd_data(cfg_rd_data), .ld_mod_code(ld_mod_code),
    .ld_bias_code(ld_bias_code), .ld_peak_code(ld_peak_code), .ld_seu_seen(ld_seu_seen));

  initial forever #(TBIT / 2) clk_ser = ~clk_ser;
  initial forever #(12500) cfg_clk = ~cfg_clk;        // 40 MHz

  initial begin
    #(TBIT * FB * (NF + 60));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("%0t %s", $time, what);
    end
  endtask

  // BCID reference: the transmitter counter state of frame k after a
  // bunch-crossing reset, a[n] = a[n-1]^a[n-4]^a[n-6]^a[n-12].
  logic [11:0] bseq[4096];
  initial begin
    prbs_model pm;
    pm = new();
    for (int k = 0; k < 4096; k++) begin
      bseq[k] = pm.state();
      pm.step4();
    end
  end

  // Data clock: serial clock / 8 with a random phase.
  int dcnt;
  initial dcnt = $urandom_range(0, 7);
  always @(posedge clk_ser) begin
    dcnt = (dcnt + 1) % 8;
    if (dcnt == 0) data_clk <= 1'b1;
    if (dcnt == 4) data_clk <= 1'b0;
  end

  // ADC lanes and the record of the frames sent. Frame f of channel c is
  // stored in sent[f][c]; key2f maps {c, first four bytes} to f.
  logic [NCH-1:0][US-1:0][7:0] sent[$];
  realtime d0_t[$];
  int key2f[logic [32:0]];
  logic [NCH-1:0][US-1:0][7:0] cur;
  int wslot = FS - 1, sf = 0;
  always @(posedge data_clk) begin
    if (!data_rst) begin
      if (wslot == 0) d0_t.push_back($realtime);
      if (wslot < US) cur[0][wslot] = din[0];
      if (wslot < US) cur[1][wslot] = din[1];
      if (wslot == US - 1) begin
        sent.push_back(cur);
        for (int c = 0; c < NCH; c++)
          key2f[{c[0], cur[c][3], cur[c][2], cur[c][1], cur[c][0]}] = sf;
        sf++;
      end
      wslot      = (wslot + 1) % FS;
      frame_clk <= wslot < FS / 2;
      if (wslot == 0) bc_reset <= (sf == BCR_F);
      begin
        logic [NCH-1:0][7:0] nd;
        for (int c = 0; c < NCH; c++) nd[c] = 8'($urandom);
        din <= nd;
      end
    end
  end

  // Fiber: a delay of dly[c] bit times; flip[c] inverts the next bit.
  int dly[NCH];
  logic [127:0] line[NCH];
  bit flip[NCH];
  int flip_t[$];                 // times of the inverted bits
  always @(posedge clk_ser) begin
    for (int c = 0; c < NCH; c++) begin
      line[c] = {line[c][126:0], tx_serial[c]};
      rx_serial[c] <= line[c][dly[c]] ^ flip[c];
      if (flip[c]) flip_t.push_back($realtime);
      flip[c] = 1'b0;
    end
  end

  always @(posedge clk_ser) begin
    static int shifted = 0, nflip = 0;
    if (sf == SHIFT_F && shifted == 0) begin
      shifted = 1;
      dly[0] += 3;
      dly[1] += 11;
    end
    if (nflip < 2 && sf == ERR_F[nflip] && wslot == 5) begin
      for (int c = 0; c < NCH; c++) flip[c] = 1'b1;
      nflip++;
    end
  end

  // Receiver monitors, one per channel.
  // Link latency without the fiber: from D0 entering the transmitter to the
  // frame's frame_end, minus the delay line.
  realtime lat_max = 0, lat_min = 1.0e9;
  for (genvar c = 0; c < NCH; c++) begin : g_mon
    logic [15:0] got[8];
    bit was_locked = 1'b0;
    int bcid_off = -1;
    always @(posedge rx_clk[c]) begin
      #1;
      if (rx_locked[c] && !was_locked) begin
        n_lock++;
        if (n_lock > NCH) n_relock++;
      end
      was_locked = rx_locked[c];
      if (rx_frame_flag[c]) got[rx_data_idx[c]] = rx_data[c];
      if (rx_frame_end[c] && rx_frame_flag[c]) begin
        if (rx_crc_flag[c]) begin
          bit near;
          near = 1'b0;
          foreach (flip_t[i]) if ($realtime - flip_t[i] < 4 * FB * TBIT) near = 1'b1;
          chk(near, $sformatf("ch%0d: CRC flag with no bit error on the line", c));
          n_crc++;
        end else begin
          logic [32:0] key;
          key = {1'(c), got[1], got[0]};
          chk(key2f.exists(key), $sformatf("ch%0d: received frame %h not sent", c, key));
          if (key2f.exists(key)) begin
            int f;
            logic [NCH-1:0][US-1:0][7:0] s;
            f = key2f[key];
            s = sent[f];
            n_frames++;
            begin
              realtime l;
              l = $realtime - d0_t[f] - dly[c] * TBIT;
              if (l > lat_max) lat_max = l;
              if (l < lat_min) lat_min = l;
            end
            for (int k = 0; k < US / 2; k++)
              chk(got[k] == {s[c][2 * k + 1], s[c][2 * k]},
                  $sformatf("ch%0d frame %0d word %0d: %h expected %h", c, f, k, got[k],
                            {s[c][2 * k + 1], s[c][2 * k]}));
            if (rx_bcid_valid[c]) begin
              n_bcid++;
              if (f < BCR_F) begin
                chk(rx_bcid[c] == bseq[f], $sformatf("ch%0d frame %0d: bcid %h expected %h",
                                                     c, f, rx_bcid[c], bseq[f]));
              end else begin
                // After the reset: the frame whose counter restarted must lie
                // within a frame of the reset, and stay fixed.
                int m;
                m = -1;
                for (int j = 0; j < 16; j++) if (bseq[j] == rx_bcid[c] && m < 0) m = j;
                if (bcid_off < 0 && m >= 0) begin
                  bcid_off = f - m;
                  n_bcid_restart++;
                  chk(bcid_off >= BCR_F - 1 && bcid_off <= BCR_F + 2,
                      $sformatf("ch%0d: counter restarted at frame %0d", c, bcid_off));
                end
                chk(bcid_off >= 0 && rx_bcid[c] == bseq[f - bcid_off],
                    $sformatf("ch%0d frame %0d: bcid %h after the reset", c, f, rx_bcid[c]));
              end
            end
          end
        end
      end
    end
  end

  // LOCld1 configuration: byte writes, readback, decoded codes, one upset.
  task automatic cfg_write(int c, bit a, logic [7:0] v);
    @(negedge cfg_clk);
    cfg_wr_en[c] = 1'b1;
    cfg_addr = a;
    cfg_wr_data = v;
    @(negedge cfg_clk);
    cfg_wr_en = '0;
  endtask

  task automatic cfg_test();
    logic [NCH-1:0][15:0] v;
    for (int c = 0; c < NCH; c++) begin
      v[c] = 16'($urandom);
      cfg_write(c, 1'b0, v[c][7:0]);
      cfg_write(c, 1'b1, v[c][15:8]);
    end
    @(negedge cfg_clk);
    for (int c = 0; c < NCH; c++) begin
      cfg_addr = 1'b0;
      #1 chk(cfg_rd_data[c] == v[c][7:0], $sformatf("ld%0d low byte", c));
      cfg_addr = 1'b1;
      #1 chk(cfg_rd_data[c] == v[c][15:8], $sformatf("ld%0d high byte", c));
      chk({ld_peak_code[c], ld_bias_code[c], ld_mod_code[c]} == v[c], $sformatf("ld%0d codes", c));
      n_cfg++;
    end
    // Upset one copy of channel 0: the vote hides it, it is flagged and repaired.
    @(negedge cfg_clk);
    dut.g_rx[0].u_ld1.copy_b[7] = ~dut.g_rx[0].u_ld1.copy_b[7];
    #1 chk({ld_peak_code[0], ld_bias_code[0], ld_mod_code[0]} == v[0], "ld0 codes after upset");
    @(negedge cfg_clk);
    chk(ld_seu_seen[0], "upset not flagged");
    chk(dut.g_rx[0].u_ld1.copy_b == v[0], "upset copy not repaired");
    chk({ld_peak_code[0], ld_bias_code[0], ld_mod_code[0]} == v[0], "ld0 codes after repair");
    if (ld_seu_seen[0] && dut.g_rx[0].u_ld1.copy_b == v[0]) n_seu++;
  endtask

  initial begin
    for (int c = 0; c < NCH; c++) dly[c] = $urandom_range(0, 100);
    // Resets rise after time 0 so that the asynchronous reset synchronizers
    // of the divided clock domains see an edge.
    #1 rst = 1'b1;
    rx_rst = 1'b1;
    repeat (40) @(posedge clk_ser);
    rst <= 1'b0;
    repeat (8) @(posedge clk_ser);
    rx_rst <= 1'b0;
    repeat (24) @(posedge clk_ser);
    data_rst <= 1'b0;
    bc_reset <= 1'b0;
    @(negedge cfg_clk) cfg_rst = 1'b0;
    cfg_test();
    wait (sf == NF);
    repeat (FB * 8) @(posedge clk_ser);
    for (int c = 0; c < NCH; c++) chk(rx_slips[c] > 0, $sformatf("ch%0d never slipped", c));
    chk(n_lock >= NCH, "a receiver never locked");
    chk(n_relock >= NCH, "a receiver never relocked after the stream shift");
    chk(n_crc >= 2 * NCH, $sformatf("only %0d CRC errors flagged", n_crc));
    chk(n_bcid > NF, $sformatf("bcid valid in only %0d frames", n_bcid));
    chk(n_bcid_restart == NCH, "bcid restart after bc_reset not seen");
    chk(n_frames > NCH * (NF - 100), $sformatf("only %0d frames checked", n_frames));
    chk(n_cfg == NCH && n_seu == 1, "LOCld1 register test incomplete");
    $display("slips %0d/%0d locks %0d relocks %0d crc errors %0d bcid valid %0d restarts %0d",
             rx_slips[0], rx_slips[1], n_lock, n_relock, n_crc, n_bcid, n_bcid_restart);
    $display("frames checked %0d, cfg %0d, upsets corrected %0d", n_frames, n_cfg, n_seu);
    $display("D0 in to frame_end out, fiber excluded: %0.2f to %0.2f ns (last user slot: %0.2f ns less)",
             lat_min / 1000.0, lat_max / 1000.0, (US - 1) * 8 * TBIT / 1000.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
