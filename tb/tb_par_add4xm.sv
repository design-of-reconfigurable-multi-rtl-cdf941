// tb_par_add4xm: check of the combinational 4x16 parallel adder.
// Applies the example A234+FFFF+0A2D+FF7F = 2ABDF, all operands at their
// maximum, all zero, and 20000 random operand sets, comparing each result
// with the integer sum.
module tb_par_add4xm;
  localparam int unsigned M = 16;
  logic [3:0][M-1:0] data_in;
  logic [M+1:0]      sum_out;
  int checks = 0, failures = 0;

  par_add4xm #(.M(M)) dut (.data_in(data_in), .sum_out(sum_out));

  task automatic check(input logic [3:0][M-1:0] d);
    longint exp_sum;
    data_in = d;
    exp_sum = 0;
    for (int r = 0; r < 4; r++) exp_sum += longint'(d[r]);
    #1;
    checks++;
    if (longint'(sum_out) != exp_sum) begin
      failures++;
      if (failures < 10) $display("FAIL %h sum=%h expected=%h", d, sum_out, exp_sum);
    end
  endtask

  initial begin
    check({16'hFF7F, 16'h0A2D, 16'hFFFF, 16'hA234});
    checks++;
    if (sum_out !== 18'h2ABDF) begin
      failures++;
      $display("FAIL example sum=%h", sum_out);
    end
    check({4{16'hFFFF}});
    check('0);
    for (int i = 0; i < 20000; i++)
      check({16'($urandom), 16'($urandom), 16'($urandom), 16'($urandom)});
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
