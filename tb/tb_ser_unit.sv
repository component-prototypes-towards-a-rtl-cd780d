// tb_ser_unit: presents a new random 16-bit word every 16 serial clocks,
// changing it half a word away from the sampling point, and checks that the
// serial output carries each word bit 0 first, 3 clk_ser cycles after the
// word is sampled, with no gap between words. Also checks the divided clocks
// (period 8 and 16 clk_ser cycles, 50 % duty).
module tb_ser_unit;
  logic clk = 1'b0, rst = 1'b1;
  logic [15:0] din = '0;
  logic sout, clk8, clk16, load;
  int checks = 0, failures = 0;
  logic [15:0] words[$];
  int cyc = 0, load_cyc[$];

  ser_unit dut (.clk_ser(clk), .rst(rst), .din(din), .sout(sout), .clk_div8(clk8),
                .clk_div16(clk16), .load(load));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Word sampled at the edge where load is high.
  always @(posedge clk) begin
    if (!rst) begin
      cyc++;
      if (load) begin
        words.push_back(din);
        load_cyc.push_back(cyc);
      end
    end
  end

  // Change din eight cycles after each load.
  initial begin
    forever begin
      @(posedge clk);
      if (!rst && load) begin
        repeat (8) @(posedge clk);
        din <= 16'($urandom);
      end
    end
  end

  // Serial check: after load at cycle c, bit i is on sout after edge c+3+i.
  int nbits = 0;
  logic [15:0] cur;
  int c0, pos = 16;
  always @(posedge clk) begin
    if (!rst) begin
      if (pos == 16 && load_cyc.size() > 0 && cyc + 1 == load_cyc[0] + 3) begin
        cur = words.pop_front();
        c0 = load_cyc.pop_front();
        pos = 0;
      end
      if (pos < 16) begin
        #1;
        checks++;
        if (sout !== cur[pos]) begin
          failures++;
          if (failures < 10) $display("word %04h bit %0d: got %0b", cur, pos, sout);
        end
        pos++;
        nbits++;
      end
    end
  end

  // Divided clocks.
  int hi8 = 0, lo8 = 0, hi16 = 0, lo16 = 0;
  always @(posedge clk) if (!rst) begin
    if (clk8) hi8++; else lo8++;
    if (clk16) hi16++; else lo16++;
  end
  int edges8 = 0, edges16 = 0;
  always @(posedge clk8) edges8++;
  always @(posedge clk16) edges16++;

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    repeat (16 * 500) @(posedge clk);
    checks++;
    if (nbits < 16 * 490) begin failures++; $display("only %0d bits checked", nbits); end
    checks++;
    if (hi8 - lo8 > 1 || lo8 - hi8 > 1 || hi16 - lo16 > 1 || lo16 - hi16 > 1 || edges8 < 999 || edges8 > 1001 || edges16 < 499 || edges16 > 501) begin
      failures++;
      $display("divided clocks: %0d/%0d %0d/%0d edges %0d %0d", hi8, lo8, hi16, lo16, edges8, edges16);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
