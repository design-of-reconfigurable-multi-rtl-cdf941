// lut4x3: the 4x3 column look-up table as a one's count circuit.
//
// The input is one column of a 4-operand addition, one bit from each operand;
// the output is the number of ones in it (0 to 4) on three bits. The truth
// table is the paper's 4x3 LUT; as in the paper it is built as combinational
// logic rather than a memory, so no clock is needed:
//   out[0] is the parity of the four bits,
//   out[1] is set when exactly two or exactly three bits are set,
//   out[2] is set only when all four bits are set.
// The equations are this design's own reduction of that table. Purely
// combinational, no latency.
module lut4x3 (
  input  logic [3:0] in_bits,
  output logic [2:0] out_sum
);
  logic p_hi, p_lo;        // parity of each pair
  logic a_hi, a_lo;        // both bits of a pair set

  always_comb begin
    p_hi = in_bits[3] ^ in_bits[2];
    p_lo = in_bits[1] ^ in_bits[0];
    a_hi = in_bits[3] & in_bits[2];
    a_lo = in_bits[1] & in_bits[0];
    out_sum[0] = p_hi ^ p_lo;
    // two or three ones: one pair full and not both, or both pairs half full
    out_sum[1] = (a_hi ^ a_lo) | (p_hi & p_lo);
    out_sum[2] = a_hi & a_lo;
  end
endmodule
