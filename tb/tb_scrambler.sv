// tb_scrambler: drives random bytes with random enable gaps into the
// scrambler and compares every scrambled byte with a bit-serial reference
// that keeps the whole scrambled history (s[n] = d[n] ^ s[n-39] ^ s[n-58]).
module tb_scrambler;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1, scr_en = 1'b0;
  logic [7:0] data = '0, scr_data;
  int checks = 0, failures = 0;
  scr_model ref_m;

  scrambler dut (.clk(clk), .rst(rst), .scr_en(scr_en), .data(data), .scr_data(scr_data));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] exp;
    int ones;
    ref_m = new();
    ones = 0;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      scr_en = $urandom_range(0, 4) != 0;
      // First a run of constant data, which the scrambler must break up.
      data   = (n < 200) ? 8'hFF : 8'($urandom);
      #1;
      if (scr_en) begin
        exp = ref_m.scr_byte(data);
        checks++;
        if (scr_data !== exp) begin
          failures++;
          if (failures < 10) $display("byte %0d: %02h expected %02h", n, scr_data, exp);
        end
        if (n < 200) ones += $countones(scr_data);
      end
    end
    // DC balance of the constant-input run: between 35 % and 65 % ones.
    checks++;
    if (ones * 100 < 35 * 8 * 160 || ones * 100 > 65 * 8 * 200) begin
      failures++;
      $display("ones in scrambled constant run: %0d", ones);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
