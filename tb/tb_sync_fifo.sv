// tb_sync_fifo: writes a counting/random word stream with a frame clock at
// the data clock, reads at an equally fast LOC clock of random phase, and
// checks order, start-of-frame tags and that every word spends more than 1
// and at most 2 LOC clock periods in the FIFO. Repeated for several phases.
`timescale 1ps/1ps
module tb_sync_fifo;
  localparam int P = 1600;            // word period, ps
  logic wclk = 1'b0, rclk = 1'b0, wrst = 1'b1, rrst = 1'b1, frame_clk = 1'b1;
  logic [7:0] din = '0, dout;
  logic dout_sof, dout_valid;
  int checks = 0, failures = 0;
  int phase;
  logic [7:0] wq[$];
  bit sq[$];
  longint tq[$];

  sync_fifo dut (.wclk(wclk), .wrst(wrst), .din(din), .frame_clk(frame_clk), .rclk(rclk),
                 .rrst(rrst), .dout(dout), .dout_sof(dout_sof), .dout_valid(dout_valid));

  initial forever #(P / 2) wclk = ~wclk;
  initial begin
    #(phase + 1);
    forever #(P / 2) rclk = ~rclk;
  end

  initial begin
    #(P * 40000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Write side: one word per wclk, frame clock high for slots 0-7 of 16.
  int slot = 0;
  always @(posedge wclk) begin
    if (!wrst) begin
      wq.push_back(din);
      sq.push_back(slot == 0);
      tq.push_back($time);
      din       <= 8'($urandom);
      slot       = (slot + 1) % 16;
      frame_clk <= slot < 8;
    end
  end

  // Read side: compare. The FIFO starts reading one entry behind the first
  // word written after reset, so that word is never delivered.
  bit dropped = 1'b0;
  always @(posedge rclk) begin
    if (dout_valid && !rrst && !dropped) begin
      void'(wq.pop_front());
      void'(sq.pop_front());
      void'(tq.pop_front());
      dropped = 1'b1;
    end
    if (dout_valid && !rrst) begin
      logic [7:0] e;
      bit s;
      longint t, lat;
      if (wq.size() == 0) begin
        failures++;
        $display("read with nothing written");
      end else begin
        e = wq.pop_front();
        s = sq.pop_front();
        t = tq.pop_front();
        lat = $time - P - t;        // dout was loaded one read period ago
        checks++;
        if (dout !== e || dout_sof !== s) begin
          failures++;
          if (failures < 10) $display("got %02h/%0b expected %02h/%0b", dout, dout_sof, e, s);
        end
        checks++;
        if (lat <= P || lat > 2 * P) begin
          failures++;
          if (failures < 10) $display("latency %0d ps outside (1,2] LOC cycles", lat);
        end
      end
    end
  end

  initial begin
    phase = $urandom_range(1, P - 1);
    repeat (3) @(posedge wclk);
    wrst = 1'b0;
    rrst = 1'b0;
    repeat (4000) @(posedge rclk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
