// tb_deser: sends a random bit stream into the deserializer and checks that
// every parallel word holds 16 consecutive bits, the earliest in bit 0, that
// the words follow each other without gaps, and that rx_clk has a period of 16
// bit clocks and rises while the word is stable.
module tb_deser;
  logic clk = 1'b0, rst = 1'b1, sin = 1'b0, rx_clk;
  logic [15:0] dout;
  int checks = 0, failures = 0;
  bit stream[$];
  int words = 0;

  deser dut (.clk_ser(clk), .rst(rst), .sin(sin), .dout(dout), .rx_clk(rx_clk));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst) begin
      stream.push_back(sin);
      sin <= 1'($urandom);
    end
  end

  // At each rx_clk rise the word holds the 16 bits sampled last, before the
  // counter wrapped. The first 16 bits after reset make the first word.
  int base = 0;
  always @(posedge rx_clk) begin
    if (!rst) begin
      logic [15:0] e;
      if (words > 0) begin
        for (int i = 0; i < 16; i++) e[i] = stream[base + i];
        checks++;
        if (dout !== e) begin
          failures++;
          if (failures < 10) $display("word %0d: %04h expected %04h", words, dout, e);
        end
        base += 16;
      end
      words++;
    end
  end

  int per = 0, last = 0, cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge rx_clk) begin
    if (last != 0) begin
      checks++;
      if (cyc - last != 16) begin failures++; $display("rx_clk period %0d", cyc - last); end
    end
    last = cyc;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    repeat (16 * 300) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
