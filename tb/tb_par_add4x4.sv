// tb_par_add4x4: exhaustive check of the combinational 4x4 parallel adder.
// All 2^16 operand combinations are applied and the 6-bit sum compared with
// the integer sum. The example A+F+1+2 = 1C is also checked with its four
// column sums 2,3,1,2 (columns 0..3).
module tb_par_add4x4;
  logic [3:0][3:0] data_in;
  logic [3:0][2:0] lut_out;
  logic [5:0]      sum_out;
  int checks = 0, failures = 0;

  par_add4x4 dut (.data_in(data_in), .lut_out(lut_out), .sum_out(sum_out));

  initial begin
    data_in = {4'h2, 4'h1, 4'hF, 4'hA};   // operands 3..0
    #1;
    checks++;
    if (sum_out !== 6'h1C || lut_out[0] !== 3'd2 || lut_out[1] !== 3'd3 ||
        lut_out[2] !== 3'd1 || lut_out[3] !== 3'd2) begin
      failures++;
      $display("FAIL example sum=%h luts=%h", sum_out, lut_out);
    end
    for (int v = 0; v < 65536; v++) begin
      int exp_sum;
      data_in = 16'(v);
      exp_sum = (v & 15) + ((v >> 4) & 15) + ((v >> 8) & 15) + ((v >> 12) & 15);
      #1;
      checks++;
      if (int'(sum_out) != exp_sum) begin
        failures++;
        if (failures < 10) $display("FAIL in=%h sum=%0d expected=%0d", v, sum_out, exp_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
