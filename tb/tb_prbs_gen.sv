// tb_prbs_gen: pulses the BCID enable once per "frame" and compares the
// control byte (marker 1010 in T8-T11, 4-bit field in T12-T15) with a
// bit-serial LFSR reference; checks that bc_reset restarts the sequence and
// that the 12-bit state repeats after exactly 4095 frames.
module tb_prbs_gen;
  import tb_ref_pkg::*;
  logic clk = 1'b0, bc_reset = 1'b1, bcid_en = 1'b0;
  logic [7:0] ctrl_byte;
  logic [11:0] state, first;
  int checks = 0, failures = 0;
  prbs_model ref_m;

  prbs_gen dut (.clk(clk), .bc_reset(bc_reset), .bcid_en(bcid_en), .ctrl_byte(ctrl_byte),
                .state(state));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_byte();
    logic [11:0] s;
    s = ref_m.state();
    checks++;
    if (ctrl_byte !== {s[3:0], 4'b0101} || state !== s) begin
      failures++;
      if (failures < 10) $display("ctrl %02h state %03h expected field %h state %03h",
                                  ctrl_byte, state, s[3:0], s);
    end
  endtask

  initial begin
    ref_m = new();
    repeat (2) @(posedge clk);
    @(negedge clk) bc_reset = 1'b0;
    for (int f = 0; f < 300; f++) begin
      @(negedge clk);
      check_byte();
      bcid_en = 1'b1;
      @(negedge clk);
      bcid_en = 1'b0;
      ref_m.step4();
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    // Reset in the middle of the sequence.
    @(negedge clk) bc_reset = 1'b1;
    @(negedge clk) bc_reset = 1'b0;
    ref_m.reset();
    for (int f = 0; f < 50; f++) begin
      @(negedge clk);
      check_byte();
      bcid_en = 1'b1;
      @(negedge clk);
      bcid_en = 1'b0;
      ref_m.step4();
    end
    // Period: 4095 frames, and no earlier repeat of the state.
    first = state;
    bcid_en = 1'b1;
    for (int f = 1; f <= 4095; f++) begin
      @(negedge clk);
      if (f < 4095 && state == first) begin
        failures++;
        $display("state repeats after %0d frames", f);
      end
    end
    bcid_en = 1'b0;
    checks++;
    if (state !== first) begin
      failures++;
      $display("state after 4095 frames %03h, start %03h", state, first);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
