// tb_crc_checker: sends frames of 7 random user words and a control word whose
// low byte is the long-division CRC of the 112 user bits (corrupted in some
// frames, marker dropped in others) and checks, one cycle later, the data
// pass-through, frame_end, the CRC flag and the end-of-frame frame flag,
// which must stay low for the first frame after reset and after a gap in the
// valid words (the descrambler is not yet primed then).
module tb_crc_checker;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  logic [15:0] din = '0, dout;
  logic [3:0] din_idx = '0, dout_idx;
  logic din_valid = 1'b0, din_marker = 1'b0, frame_flag, frame_end, crc_flag;
  int checks = 0, failures = 0, nerr = 0;

  crc_checker dut (.clk(clk), .rst(rst), .din(din), .din_idx(din_idx), .din_valid(din_valid),
                   .din_marker(din_marker), .dout(dout), .dout_idx(dout_idx),
                   .frame_flag(frame_flag), .frame_end(frame_end), .crc_flag(crc_flag));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit msg[];
    logic [7:0] c;
    bit bad, nomark, primed;
    primed = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int f = 0; f < 300; f++) begin
      msg = new[112];
      bad = (f % 7) == 3;
      nomark = (f % 11) == 5;
      if (f == 150 || f == 220) begin
        // A gap in the valid words, as when lock is lost and found again.
        din_valid = 1'b0;
        din_idx = 4'($urandom_range(0, 7));
        @(negedge clk);
        checks++;
        if (frame_flag || frame_end) begin
          failures++;
          $display("frame %0d: flags during the gap", f);
        end
        primed = 1'b0;
      end
      for (int k = 0; k < 8; k++) begin
        din_valid = 1'b1;
        din_idx = 4'(k);
        if (k < 7) begin
          din = 16'($urandom);
          for (int i = 0; i < 16; i++) msg[16 * k + i] = din[i];
          din_marker = 1'b0;
        end else begin
          c = crc_ref(msg, 112);
          if (bad) c ^= 8'(1 << $urandom_range(0, 7));
          din = {4'h0, 4'b0101, c};
          din_marker = !nomark;
        end
        @(negedge clk);
        checks++;
        if (dout !== din || dout_idx !== din_idx || frame_end !== (k == 7)) begin
          failures++;
          $display("frame %0d word %0d: pass-through", f, k);
        end
        checks++;
        if (frame_flag !== (primed && (k < 7 || !nomark))) begin
          failures++;
          $display("frame %0d word %0d: frame_flag %0b", f, k, frame_flag);
        end
        if (k == 7) begin
          checks++;
          nerr += crc_flag;
          if (crc_flag !== bad) begin
            failures++;
            $display("frame %0d: crc_flag %0b expected %0b", f, crc_flag, bad);
          end
          primed = 1'b1;
        end
      end
    end
    checks++;
    if (nerr == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
