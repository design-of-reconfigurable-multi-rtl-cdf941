// par_add4xm: combinational 4-operand, M-bit parallel adder (M a multiple of 4).
//
// The operands are cut into M/4 slices of four columns. Each slice goes to a
// 4x4 parallel adder that returns a 6-bit partial sum P_j, weighted 2^(4j).
// Neighbouring partial sums therefore overlap in two bit positions. The
// partial sums are merged from the least significant slice upwards: the
// running result R (bits above 4j) is added to P_j by a half adder in the
// lowest overlapping bit, a full adder in the second, and a chain of half
// adders that carries into the upper bits of P_j. Each merge is exact: the
// running sum above bit 4j is at most 3, so the chain never carries out of
// the 6 bits of P_j. This follows the half/full adder network of the paper's
// 4x16 adder; the exact cell placement is this design's own. Result width
// M+2. Purely combinational.
module par_add4xm #(
  parameter int unsigned M = 16
) (
  input  logic [3:0][M-1:0] data_in,           // data_in[r] is operand r
  output logic [M+1:0]      sum_out
);
  localparam int unsigned SL = M / 4;

  logic [SL-1:0][5:0] part;                    // partial sums P_j

  for (genvar j = 0; j < SL; j++) begin : g_slice
    logic [3:0][3:0] slice;
    logic [3:0][2:0] lut_unused;
    always_comb
      for (int r = 0; r < 4; r++) slice[r] = data_in[r][4*j +: 4];
    par_add4x4 u_add (.data_in(slice), .lut_out(lut_unused), .sum_out(part[j]));
  end

  // Ripple merge. hi holds the two bits of the running sum above bit 4j.
  always_comb begin
    logic [1:0] hi;
    logic [5:0] merged;
    logic       c;
    sum_out = '0;
    sum_out[3:0] = part[0][3:0];
    hi = part[0][5:4];
    for (int j = 1; j < SL; j++) begin
      // half adder, bit 0 of the slice
      merged[0] = part[j][0] ^ hi[0];
      c         = part[j][0] & hi[0];
      // full adder, bit 1
      merged[1] = part[j][1] ^ hi[1] ^ c;
      c         = (part[j][1] & hi[1]) | (c & (part[j][1] ^ hi[1]));
      // half adder chain, bits 2..5
      for (int b = 2; b < 6; b++) begin
        merged[b] = part[j][b] ^ c;
        c         = part[j][b] & c;
      end
      sum_out[4*j +: 4] = merged[3:0];
      hi = merged[5:4];
    end
    sum_out[M +: 2] = hi;
  end
endmodule
