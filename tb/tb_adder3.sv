// tb_adder3: exhaustive check of the 3-bit adder of the serial adder.
// Every LUT value 0..4 is added to every carry 0..3 (the 20 combinations
// that can occur) and compared with the integer sum.
module tb_adder3;
  logic [2:0] lut_sum;
  logic [1:0] carry;
  logic [2:0] total;
  int checks = 0, failures = 0;

  adder3 dut (.lut_sum(lut_sum), .carry(carry), .total(total));

  initial begin
    for (int l = 0; l <= 4; l++)
      for (int c = 0; c <= 3; c++) begin
        lut_sum = 3'(l);
        carry   = 2'(c);
        #1;
        checks++;
        if (int'(total) != l + c) begin
          failures++;
          $display("FAIL L=%0d C=%0d total=%0d", l, c, total);
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
