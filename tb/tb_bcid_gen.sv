// tb_bcid_gen: feeds the 4-bit fields of the reference LFSR, one per frame,
// and checks that two cycles later bcid equals the transmitter's 12-bit state
// and bcid_valid is set once three fields have been seen and the newest one
// is the predicted one; a corrupted field must clear bcid_valid for that frame
// and the three after it, while it is in the history; loss of lock
// restarts the history.
module tb_bcid_gen;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1, field_valid = 1'b0, locked = 1'b0;
  logic [3:0] field = '0;
  logic [11:0] bcid;
  logic bcid_valid, bcid_strobe;
  int checks = 0, failures = 0, nvalid = 0, nbad = 0;
  prbs_model pm;

  bcid_gen dut (.clk(clk), .rst(rst), .field(field), .field_valid(field_valid), .locked(locked),
                .bcid(bcid), .bcid_valid(bcid_valid), .bcid_strobe(bcid_strobe));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int nframes, int bad_at);
    logic [11:0] s;
    bit bad;
    for (int f = 0; f < nframes; f++) begin
      s = pm.state();
      bad = f == bad_at;
      @(negedge clk);
      field = bad ? ~s[3:0] : s[3:0];
      field_valid = 1'b1;
      @(negedge clk);
      field_valid = 1'b0;
      checks++;
      if (bcid_strobe) begin failures++; $display("strobe after one cycle"); end
      @(negedge clk);
      checks++;
      if (!bcid_strobe) begin failures++; $display("no strobe after two cycles"); end
      checks++;
      // A bad field spoils the prediction until it has left the 3-field history.
      if (bcid_valid !== (f >= 3 && (bad_at < 0 || f < bad_at || f > bad_at + 3))) begin
        failures++;
        $display("frame %0d: bcid_valid %0b", f, bcid_valid);
      end
      if (bcid_valid) begin
        nvalid++;
        checks++;
        if (bcid !== s) begin failures++; $display("frame %0d: bcid %03h expected %03h", f, bcid, s); end
      end
      if (bad) nbad++;
      pm.step4();
      repeat ($urandom_range(2, 5)) @(negedge clk);
    end
  endtask

  initial begin
    pm = new();
    for (int i = 0; i < 37; i++) pm.step4();
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    locked = 1'b1;
    run(200, 100);
    @(negedge clk) locked = 1'b0;
    @(negedge clk) locked = 1'b1;
    run(50, -1);
    checks++;
    if (nvalid < 200 || nbad != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
