// tb_descrambler: scrambles random 16-bit user words with the bit-serial
// reference scrambler, inserts an unscrambled control word every 8th word and
// idle (invalid) cycles, and checks that the descrambler returns the original
// words one cycle later, passes control words unchanged and keeps index and
// valid aligned.
module tb_descrambler;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  logic [15:0] din = '0, dout;
  logic [3:0] din_idx = '0, dout_idx;
  logic din_valid = 1'b0, dout_valid;
  int checks = 0, failures = 0;
  scr_model sm;

  descrambler dut (.clk(clk), .rst(rst), .din(din), .din_idx(din_idx), .din_valid(din_valid),
                   .dout(dout), .dout_idx(dout_idx), .dout_valid(dout_valid));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] plain, e;
    logic [3:0] ei;
    sm = new();
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int n = 0; n < 4000; n++) begin
      int k;
      k = n % 8;
      plain = (n < 80) ? 16'h0000 : 16'($urandom);
      if (k < 7) for (int i = 0; i < 16; i++) din[i] = sm.scr_bit(plain[i]);
      else din = plain;
      din_idx   = 4'(k);
      din_valid = 1'b1;
      e  = plain;
      ei = 4'(k);
      @(negedge clk);
      checks++;
      if (dout !== e || dout_idx !== ei || !dout_valid) begin
        failures++;
        if (failures < 10) $display("word %0d: %04h/%0d expected %04h/%0d", n, dout, dout_idx, e, ei);
      end
      if ($urandom_range(0, 5) == 0) begin
        din_valid = 1'b0;
        din = 16'($urandom);
        @(negedge clk);
        checks++;
        if (dout_valid) begin failures++; $display("valid during idle"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
