// tb_locx2_tx: the two-channel transmitter from ADC lanes to serial lines at
// 5.12 Gb/s. The data clock is derived from the serial clock (divide by 8,
// random phase), as all clocks come from one reference. Each channel gets its
// own random lane data; the serial outputs are captured and compared, frame
// by frame and bit by bit, with the reference frames (slots in order, lane 0
// first). Checks that the frames follow each other without gaps, and that the
// time from D0 entering the encoder to its first bit leaving the serializer
// stays under 10.9 ns, the transmitter latency estimated for this chip (by
// design at most 3 encoder cycles + 2 gearbox cycles + 12 bit times waiting
// for the serializer load + 3 bit times in the tree = 55 bit times, 10.74 ns).
`timescale 1ps/1fs
module tb_locx2_tx;
  import tb_ref_pkg::*;
  localparam int NCH = 2;
  localparam int NF = 150;
  localparam realtime TBIT = 195.3125;     // 5.12 Gb/s
  logic clk_ser = 1'b0, rst = 1'b0, data_clk = 1'b0, data_rst = 1'b1, bc_reset = 1'b1;
  logic frame_clk = 1'b0;
  logic [NCH-1:0][7:0] din = '0;
  logic [NCH-1:0] sout, loc_clk;
  int checks = 0, failures = 0;

  locx2_tx dut (.clk_ser(clk_ser), .rst(rst), .data_clk(data_clk), .data_rst(data_rst), .din(din),
                .frame_clk(frame_clk), .bc_reset(bc_reset), .sout(sout), .loc_clk(loc_clk));

  initial forever #(TBIT / 2) clk_ser = ~clk_ser;

  initial begin
    #(TBIT * 128 * (NF + 30));
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Data clock: serial clock / 8 with a random phase.
  int dcnt;
  initial dcnt = $urandom_range(0, 7);
  always @(posedge clk_ser) begin
    dcnt = (dcnt + 1) % 8;
    if (dcnt == 0) data_clk <= 1'b1;
    if (dcnt == 4) data_clk <= 1'b0;
  end

  // ADC lanes; expected line bits per channel.
  frame_model fm[NCH];
  logic [NCH-1:0] exp_bits[$];   // bit of every channel, in line order
  realtime    d0_t[$];
  logic [7:0] d[NCH][14];
  int wslot = 15;
  always @(posedge data_clk) begin
    if (!data_rst) begin
      if (wslot == 0) d0_t.push_back($realtime);
      if (wslot < 14) for (int c = 0; c < NCH; c++) d[c][wslot] = din[c];
      if (wslot == 13) begin
        logic [7:0] o[NCH][16];
        logic [7:0] dd[], oo[];
        logic [NCH-1:0] v;
        for (int c = 0; c < NCH; c++) begin
          dd = new[14];
          for (int k = 0; k < 14; k++) dd[k] = d[c][k];
          fm[c].build(dd, oo);
          for (int k = 0; k < 16; k++) o[c][k] = oo[k];
        end
        for (int k = 0; k < 16; k++)
          for (int i = 0; i < 8; i++) begin
            for (int c = 0; c < NCH; c++) v[c] = o[c][k][i];
            exp_bits.push_back(v);
          end
      end
      wslot      = (wslot + 1) % 16;
      frame_clk <= wslot < 8;
      begin
        logic [NCH-1:0][7:0] nd;
        for (int c = 0; c < NCH; c++) nd[c] = 8'($urandom);
        din <= nd;
      end
    end
  end

  // Line capture.
  logic [NCH-1:0] got[$];
  realtime got_t[$];
  always @(posedge clk_ser) begin
    if (!rst) begin
      got.push_back(sout);
      got_t.push_back($realtime);
    end
  end

  // One channel's bits, taken out with shifts (plain bit selects on queue
  // elements are avoided on purpose: they are not reliable in every tool).
  function automatic bit gbit(int i, int c);
    logic [NCH-1:0] w;
    w = got[i];
    return 1'((w >> c) & 1);
  endfunction
  function automatic bit ebit(int i, int c);
    logic [NCH-1:0] w;
    w = exp_bits[i];
    return 1'((w >> c) & 1);
  endfunction

  function automatic int find_start(int c);
    for (int p = 0; p + 128 <= got.size(); p++) begin
      int b;
      b = 0;
      while (b < 128 && gbit(p + b, c) == ebit(b, c)) b++;
      if (b == 128) return p;
    end
    return -1;
  endfunction

  initial begin
    int start[NCH];
    realtime lat;
    for (int c = 0; c < NCH; c++) begin
      fm[c] = new(14);
    end
    // rst rises after time 0 so that the asynchronous reset synchronizers
    // of the LOC clock domain see an edge.
    #1 rst = 1'b1;
    repeat (40) @(posedge clk_ser);
    rst <= 1'b0;
    repeat (24) @(posedge clk_ser);
    data_rst <= 1'b0;
    bc_reset <= 1'b0;
    repeat (128 * (NF + 4)) @(posedge clk_ser);
    for (int c = 0; c < NCH; c++) begin
      // Find the first frame on the line.
      start[c] = find_start(c);
      checks++;
      if (start[c] < 0) begin
        failures++;
        $display("channel %0d: first frame not found", c);
      end else begin
        int nbad;
        nbad = 0;
        for (int b = 0; b < 128 * NF; b++) begin
          checks++;
          if (gbit(start[c] + b, c) != ebit(b, c)) nbad++;
        end
        failures += nbad;
        if (nbad > 0) $display("channel %0d: %0d wrong bits", c, nbad);
      end
    end
    if (start[0] >= 0) begin
      // The first bit on the line is output by the edge at got_t[start].
      lat = got_t[start[0]] - d0_t[0];
      $display("D0 to first serial bit: %0.3f ns (limit 10.9 ns)", lat / 1000.0);
      checks++;
      if (lat > 10900.0 || start[0] != start[1]) begin
        failures++;
        $display("latency %0.3f ns or channels not aligned (%0d, %0d)", lat / 1000.0, start[0], start[1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
