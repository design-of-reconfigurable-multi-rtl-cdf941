// tb_lut4x3: exhaustive check of the 4x3 column LUT.
// All 16 input columns are applied; the expected output is the number of
// ones, counted bit by bit in the testbench.
module tb_lut4x3;
  logic [3:0] in_bits;
  logic [2:0] out_sum;
  int checks = 0, failures = 0;

  lut4x3 dut (.in_bits(in_bits), .out_sum(out_sum));

  initial begin
    for (int v = 0; v < 16; v++) begin
      int ones;
      in_bits = 4'(v);
      ones = 0;
      for (int b = 0; b < 4; b++) if ((v & (1 << b)) != 0) ones++;
      #1;
      checks++;
      if (out_sum !== 3'(ones)) begin
        failures++;
        $display("FAIL in=%b out=%0d expected=%0d", in_bits, out_sum, ones);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
