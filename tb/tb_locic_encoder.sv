// tb_locic_encoder: feeds 8 ADC lanes (random user slots, junk in the two
// control slots) with a frame clock at the data clock, runs the LOC clock at
// the same rate and random phase, and compares every output slot with the
// reference frame (scrambled user data, long-division CRC, 1010 marker and
// LFSR field). Checks that the encoder latency, data-clock edge of D0 to the
// LOC edge that puts it out, is within 4 LOC cycles (6.25 ns at 640 MHz),
// and that the output runs at 16 slots per frame without gaps.
`timescale 1ps/1ps
module tb_locic_encoder;
  import tb_ref_pkg::*;
  import locic_pkg::*;
  localparam int P = 1562;              // LOC / data clock period, ps (640 MHz)
  localparam int NFRAMES = 300;
  logic data_clk = 1'b0, clk = 1'b0, data_rst = 1'b1, rst = 1'b1, bc_reset = 1'b1;
  logic frame_clk = 1'b0;
  logic [7:0] din = '0, dout;
  logic [4:0] dout_slot;
  slot_kind_e dout_kind;
  logic dout_valid;
  int checks = 0, failures = 0, phase, frames_seen = 0, max_lat = 0, min_lat = 1 << 30;
  logic [7:0] user_q[$];       // user words per frame, in order
  longint     d0_time[$];      // write time of D0 of each frame

  locic_encoder dut (.data_clk(data_clk), .data_rst(data_rst), .din(din), .frame_clk(frame_clk),
                     .clk(clk), .rst(rst), .bc_reset(bc_reset), .dout(dout),
                     .dout_slot(dout_slot), .dout_kind(dout_kind), .dout_valid(dout_valid));

  initial forever #(P / 2) data_clk = ~data_clk;
  initial begin
    #(phase + 1);
    forever #(P / 2) clk = ~clk;
  end

  initial begin
    #(P * 20 * (NFRAMES + 10));
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ADC side. The first word after reset is not delivered by the FIFO, so the
  // stream starts with a junk slot 15.
  int wslot = 15;               // slot of the word currently driven on din
  always @(posedge data_clk) begin
    if (!data_rst) begin
      if (wslot == 0) d0_time.push_back($time);
      if (wslot < 14) user_q.push_back(din);
      wslot      = (wslot + 1) % 16;
      frame_clk <= wslot < 8;
      din       <= 8'($urandom);
    end
  end

  // Output side: expected bytes are built slot by slot from the reference
  // scrambler, CRC and PRBS models.
  scr_model  scr_m;
  prbs_model prbs_m;
  bit msg[];
  logic [7:0] e, w;
  logic [11:0] ps;
  int oslot = -1;
  longint lat;
  always @(posedge clk) begin
    if (!rst && dout_valid) begin
      if (dout_slot == 0) begin
        lat = $time - P - d0_time.pop_front();
        if (lat > max_lat) max_lat = int'(lat);
        if (lat < min_lat) min_lat = int'(lat);
        frames_seen++;
        msg = new[112];
      end
      if (dout_slot < 14) begin
        w = user_q.pop_front();
        for (int i = 0; i < 8; i++) msg[8 * dout_slot + i] = w[i];
        e = scr_m.scr_byte(w);
      end else if (dout_slot == 14) begin
        e = crc_ref(msg, 112);
      end else begin
        ps = prbs_m.state();
        e  = {ps[3:0], 4'b0101};
        prbs_m.step4();
      end
      checks++;
      if (oslot >= 0 && int'(dout_slot) != (oslot + 1) % 16) begin
        failures++;
        $display("slot %0d after %0d", dout_slot, oslot);
      end
      oslot = int'(dout_slot);
      checks++;
      if (dout !== e) begin
        failures++;
        if (failures < 10)
          $display("frame %0d slot %0d: %02h expected %02h", frames_seen, dout_slot, dout, e);
      end
    end else if (!rst && oslot >= 0) begin
      failures++;
      $display("gap in the output");
    end
  end

  initial begin
    scr_m = new();
    prbs_m = new();
    phase = $urandom_range(1, P - 1);
    repeat (4) @(posedge data_clk);
    data_rst = 1'b0;
    @(posedge clk);
    rst <= 1'b0;
    bc_reset <= 1'b0;
    while (frames_seen < NFRAMES) @(posedge clk);
    checks++;
    if (max_lat > 4 * P || min_lat < P) begin
      failures++;
      $display("latency %0d..%0d ps, limit %0d", min_lat, max_lat, 4 * P);
    end
    $display("encoder latency %0d..%0d ps (LOC period %0d ps)", min_lat, max_lat, P);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
