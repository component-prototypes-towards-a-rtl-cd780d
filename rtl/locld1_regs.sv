// locld1_regs: the 16-bit configuration register of the LOCld1 VCSEL driver,
// protected by triple modular redundancy (TMR).
//
// Three copies of the 16 bits are kept. Every read and every output uses the
// bitwise majority of the three, and each cycle all copies are rewritten with
// the voted value, so a single-event upset in one copy is outvoted at once and
// repaired on the next clock. A write from the I2C slave (one byte at a time,
// address 0 = bits 7:0, address 1 = bits 15:8) updates all three copies.
// seu_seen pulses in the cycle after the copies disagreed.
//
// The voted bits drive the DACs: modulation current code, VCSEL bias current
// code and shunt-peaking strength code. From the source: 16 bits of internal
// registers, TMR, and the three programmable quantities. The field layout
// (5/6/5 bits), byte addressing, reset value and refresh each cycle are this
// design's choices; the I2C slave itself is an outside design and not here.
module locld1_regs #(
  parameter logic [15:0] RESET_VALUE = 16'h0000
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        wr_en,
  input  logic        addr,
  input  logic [7:0]  wr_data,
  output logic [7:0]  rd_data,
  output logic [4:0]  mod_code,    // modulation current DAC
  output logic [5:0]  bias_code,   // bias current DAC
  output logic [4:0]  peak_code,   // shunt-peaking voltage DAC (Vctrl)
  output logic        seu_seen
);
  logic [15:0] copy_a, copy_b, copy_c, voted, next_val;

  assign voted = (copy_a & copy_b) | (copy_b & copy_c) | (copy_a & copy_c);

  always_comb begin
    next_val = voted;
    if (wr_en) begin
      if (addr) next_val[15:8] = wr_data;
      else      next_val[7:0]  = wr_data;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      copy_a   <= RESET_VALUE;
      copy_b   <= RESET_VALUE;
      copy_c   <= RESET_VALUE;
      seu_seen <= 1'b0;
    end else begin
      copy_a   <= next_val;
      copy_b   <= next_val;
      copy_c   <= next_val;
      seu_seen <= (copy_a != copy_b) || (copy_b != copy_c);
    end
  end

  assign rd_data   = addr ? voted[15:8] : voted[7:0];
  assign mod_code  = voted[4:0];
  assign bias_code = voted[10:5];
  assign peak_code = voted[15:11];
endmodule
