// tb_crc_gen: folds 14 random slots per frame into crc_gen, with idle cycles
// in between, and compares the CRC after each frame with a long-division
// reference. Also checks that start clears the previous frame's CRC.
module tb_crc_gen;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1, crc_en = 1'b0, start = 1'b0;
  logic [7:0] data = '0, crc;
  int checks = 0, failures = 0;

  crc_gen dut (.clk(clk), .rst(rst), .crc_en(crc_en), .start(start), .data(data), .crc(crc));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit msg[];
    logic [7:0] exp;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    for (int f = 0; f < 200; f++) begin
      msg = new[112];
      for (int k = 0; k < 14; k++) begin
        @(negedge clk);
        data   = (f == 0) ? 8'h00 : (f == 1 ? 8'hFF : 8'($urandom));
        crc_en = 1'b1;
        start  = k == 0;
        for (int i = 0; i < 8; i++) msg[8 * k + i] = data[i];
        if ($urandom_range(0, 3) == 0) begin   // idle cycle inside the frame
          @(negedge clk);
          crc_en = 1'b0;
        end
      end
      @(negedge clk);
      crc_en = 1'b0;
      start  = 1'b0;
      exp = crc_ref(msg, 112);
      checks++;
      if (crc !== exp) begin
        failures++;
        $display("frame %0d: crc %02h expected %02h", f, crc, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
