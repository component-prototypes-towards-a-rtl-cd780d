// tb_locld1_regs: writes random bytes to the two addresses of the LOCld1
// register, checks read-back and the DAC code fields against a model, then
// upsets single bits of one copy through hierarchical references and checks
// that outputs are unaffected, the upset is flagged and repaired next cycle.
module tb_locld1_regs;
  logic clk = 1'b0, rst = 1'b1, wr_en = 1'b0, addr = 1'b0;
  logic [7:0] wr_data = '0, rd_data;
  logic [4:0] mod_code, peak_code;
  logic [5:0] bias_code;
  logic seu_seen;
  logic [15:0] model;
  int checks = 0, failures = 0;

  locld1_regs dut (.clk(clk), .rst(rst), .wr_en(wr_en), .addr(addr), .wr_data(wr_data),
                   .rd_data(rd_data), .mod_code(mod_code), .bias_code(bias_code),
                   .peak_code(peak_code), .seu_seen(seu_seen));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(string what);
    checks++;
    if (mod_code !== model[4:0] || bias_code !== model[10:5] || peak_code !== model[15:11]) begin
      failures++;
      $display("%s: codes %h %h %h, model %04h", what, mod_code, bias_code, peak_code, model);
    end
    addr = 1'b0;
    #1 checks++;
    if (rd_data !== model[7:0]) begin failures++; $display("%s: rd lo %02h", what, rd_data); end
    addr = 1'b1;
    #1 checks++;
    if (rd_data !== model[15:8]) begin failures++; $display("%s: rd hi %02h", what, rd_data); end
  endtask

  initial begin
    int b, which;
    model = 16'h0000;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    check_all("reset");
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      wr_en   = 1'b1;
      addr    = 1'($urandom);
      wr_data = 8'($urandom);
      if (addr) model[15:8] = wr_data; else model[7:0] = wr_data;
      @(negedge clk);
      wr_en = 1'b0;
      check_all("write");
    end
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      b = $urandom_range(0, 15);
      which = $urandom_range(0, 2);
      case (which)
        0: dut.copy_a[b] = ~dut.copy_a[b];
        1: dut.copy_b[b] = ~dut.copy_b[b];
        default: dut.copy_c[b] = ~dut.copy_c[b];
      endcase
      #1 check_all("upset");
      @(negedge clk);
      checks++;
      if (!seu_seen) begin failures++; $display("upset not flagged"); end
      checks++;
      if (dut.copy_a !== model || dut.copy_b !== model || dut.copy_c !== model) begin
        failures++;
        $display("upset not repaired");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
