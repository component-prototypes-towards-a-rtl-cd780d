// tb_frame_builder: drives the frame builder directly with words, a
// start-of-frame tag every 16 words and fixed stand-ins for scrambler, CRC
// and PRBS, and checks slot numbering, slot kinds, which input appears in
// which slot, the enable pulses, the one-cycle latency, a re-alignment when
// the start-of-frame tag comes early, and the 12-user-slot variant.
module tb_frame_builder;
  import locic_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Two instances: 14 user slots (default) and 12.
  logic [7:0] in_data = '0, crc = 8'h3C, ctrl = 8'hA5;
  logic in_sof = 1'b0, in_valid = 1'b0;
  logic [7:0] scr14, scr12;
  logic scr_en14, crc_en14, crc_start14, bcid_en14, v14;
  logic scr_en12, crc_en12, crc_start12, bcid_en12, v12;
  logic [7:0] d14, d12;
  logic [4:0] s14, s12;
  slot_kind_e k14, k12;

  assign scr14 = ~in_data;
  assign scr12 = ~in_data;

  frame_builder dut (.clk(clk), .rst(rst), .in_data(in_data), .in_sof(in_sof), .in_valid(in_valid),
    .scr_data(scr14), .crc(crc), .ctrl_byte(ctrl), .scr_en(scr_en14), .crc_en(crc_en14),
    .crc_start(crc_start14), .bcid_en(bcid_en14), .dout(d14), .dout_slot(s14),
    .dout_kind(k14), .dout_valid(v14));

  frame_builder #(.USER_SLOTS(12)) dut12 (.clk(clk), .rst(rst), .in_data(in_data),
    .in_sof(in_sof), .in_valid(in_valid), .scr_data(scr12), .crc(crc), .ctrl_byte(ctrl),
    .scr_en(scr_en12), .crc_en(crc_en12), .crc_start(crc_start12), .bcid_en(bcid_en12),
    .dout(d12), .dout_slot(s12), .dout_kind(k12), .dout_valid(v12));

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("%0t %s", $time, what);
    end
  endtask

  // Drive one frame of n slots; sof on the first, input = {frame, slot}.
  task automatic frame(int f, int n, int nu, bit is14);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_sof   = (k == 0);
      in_data  = 8'((f << 4) | k);
      crc      = 8'($urandom);
      ctrl     = 8'($urandom);
      #1;
      if (is14) begin
        chk(scr_en14 == (k < nu) && crc_en14 == (k < nu) && bcid_en14 == (k == nu + 1),
            "enables (14)");
        chk(!(k == 0) || crc_start14, "crc start (14)");
      end else begin
        chk(scr_en12 == (k < nu) && bcid_en12 == (k == nu + 1), "enables (12)");
      end
      begin
        logic [7:0] e;
        e = (k < nu) ? ~in_data : (k == nu ? crc : ctrl);
        @(posedge clk);
        #1;
        if (is14) begin
          chk(v14 && s14 == 5'(k) && d14 == e, $sformatf("slot %0d out %02h exp %02h", k, d14, e));
          chk(k14 == ((k < nu) ? SLOT_USER : (k == nu ? SLOT_CRC : SLOT_MARK)), "kind (14)");
        end else begin
          chk(v12 && s12 == 5'(k) && d12 == e, $sformatf("12: slot %0d out %02h exp %02h", k, d12, e));
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    #1 chk(!v14 && !scr_en14, "idle before the first start of frame");
    for (int f = 0; f < 20; f++) frame(f, 16, 14, 1'b1);
    // Early start of frame: re-aligns at once.
    for (int k = 0; k < 5; k++) begin
      @(negedge clk);
      in_sof = 1'b0;
      in_data = 8'hEE;
    end
    for (int f = 0; f < 5; f++) frame(f, 16, 14, 1'b1);
    // 12-user-slot instance: 14-slot frames.
    @(negedge clk) rst = 1'b1;
    in_valid = 1'b0;
    @(negedge clk) rst = 1'b0;
    for (int f = 0; f < 20; f++) frame(f, 14, 12, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
