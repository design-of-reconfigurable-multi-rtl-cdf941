// adder3: the 3-bit adder of the serial 4-operand adder.
//
// Adds the column sum L from the 4x3 LUT (0 to 4) and the 2-bit carry C
// (0 to 3) held from the previous column, with C zero-padded to three bits.
// The result is at most 4 + 3 = 7, so three bits always hold it and there is
// no carry out. Bit 0 is the result bit of the current column, bits 2:1 the
// carry into the next column. The paper notes that only 20 of the 64 input
// combinations can occur; this design simply uses a 3-bit ripple adder
// (half adder, full adder, half adder). Combinational, no latency.
module adder3 (
  input  logic [2:0] lut_sum,   // L, 0..4
  input  logic [1:0] carry,     // C, 0..3
  output logic [2:0] total      // L + C, 0..7
);
  logic c1, c2;   // carries into bits 1 and 2; the carry out of bit 2 is always 0

  // bit 0: half adder, bit 1: full adder, bit 2: half adder (padded C bit is 0)
  assign total[0] = lut_sum[0] ^ carry[0];
  assign c1       = lut_sum[0] & carry[0];
  assign total[1] = lut_sum[1] ^ carry[1] ^ c1;
  assign c2       = (lut_sum[1] & carry[1]) | (c1 & (lut_sum[1] ^ carry[1]));
  assign total[2] = lut_sum[2] ^ c2;
endmodule
