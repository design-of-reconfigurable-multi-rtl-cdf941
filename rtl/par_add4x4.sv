// par_add4x4: combinational 4-operand, 4-bit parallel adder.
//
// All four columns are counted at once by four copies of the 4x3 LUT
// (column i gives L_i, 0..4). The total is then sum(L_i * 2^i), at most
// 4 * 15 = 60, on six bits. The paper builds the second stage from further
// LUTs, a half adder and an OR gate, but its schematic is not reproduced, so
// here the second stage is written as the weighted addition of the four LUT
// outputs and left to synthesis. Purely combinational; the result is
// available in the same clock as the operands.
module par_add4x4 (
  input  logic [3:0][3:0] data_in,    // data_in[r] is operand r
  output logic [3:0][2:0] lut_out,    // column sums L_3..L_0
  output logic [5:0]      sum_out
);
  for (genvar c = 0; c < 4; c++) begin : g_col
    logic [3:0] column;
    always_comb
      for (int r = 0; r < 4; r++) column[r] = data_in[r][c];
    lut4x3 u_lut (.in_bits(column), .out_sum(lut_out[c]));
  end

  always_comb
    sum_out = 6'(lut_out[0]) + (6'(lut_out[1]) << 1)
            + (6'(lut_out[2]) << 2) + (6'(lut_out[3]) << 3);
endmodule
