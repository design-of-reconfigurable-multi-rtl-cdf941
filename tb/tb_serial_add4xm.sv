// tb_serial_add4xm: self-checking test of the 4-operand serial adder.
//
// Two instances are tested: M = 4 and M = 16 (the default). For each
// addition the testbench loads the operands, starts the adder, records the
// column sum shown on every clock, counts the clocks until done and compares
//   - the (M+2)-bit result with the integer sum (plus carry_in),
//   - each column sum with the number of ones in that column,
//   - the latency with M+1 clocks.
// Worked examples: A+F+1+2 = 1C with column sums 2,3,1,2 (M = 4) and
// A234+FFFF+0A2D+FF7F = 2ABDF (M = 16), then random operands and a
// separate load followed later by start.
module tb_serial_add4xm;
  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // M = 4 instance
  logic         load4, start4, busy4, done4;
  logic [3:0][3:0] d4;
  logic [1:0]   cin4;
  logic [5:0]   s4;
  logic [2:0]   lut4;
  serial_add4xm #(.M(4)) dut4 (
    .clk(clk), .rst_n(rst_n), .load(load4), .start(start4), .data_in(d4),
    .carry_in(cin4), .sum_out(s4), .lut_out(lut4), .busy(busy4), .done(done4));

  // M = 16 instance (default size)
  logic          load16, start16, busy16, done16;
  logic [3:0][15:0] d16;
  logic [1:0]    cin16;
  logic [17:0]   s16;
  logic [2:0]    lut16;
  serial_add4xm dut16 (
    .clk(clk), .rst_n(rst_n), .load(load16), .start(start16), .data_in(d16),
    .carry_in(cin16), .sum_out(s16), .lut_out(lut16), .busy(busy16), .done(done16));

  function automatic int ones_col(input logic [3:0][15:0] d, input logic [3:0] c);
    int n = 0;
    for (int r = 0; r < 4; r++) n += int'(d[r][c]);
    return n;
  endfunction

  task automatic run4(input logic [3:0][3:0] d, input logic [1:0] cin, input bit separate);
    int cycles, exp_sum;
    int luts[$];
    @(negedge clk);
    d4 = d; cin4 = cin; load4 = 1'b1; start4 = !separate;
    if (separate) begin
      @(negedge clk);
      load4 = 1'b0; d4 = '0; start4 = 1'b1;
    end
    #1 luts.push_back(int'(lut4));   // column 0 is added on the start edge
    @(posedge clk); #1;
    load4 = 1'b0; start4 = 1'b0;
    cycles = 1;   // the start edge adds column 0
    while (!done4 && cycles < 100) begin
      if (busy4) luts.push_back(int'(lut4));
      @(posedge clk); #1; cycles++;
    end
    exp_sum = int'(cin);
    for (int r = 0; r < 4; r++) exp_sum += int'(d[r]);
    checks++;
    if (int'(s4) != exp_sum) begin
      failures++; $display("FAIL M=4 %h sum=%h expected=%h", d, s4, exp_sum);
    end
    checks++;
    if (cycles != 5) begin
      failures++; $display("FAIL M=4 latency %0d, expected 5", cycles);
    end
    for (int c = 0; c < 4; c++) begin
      int n = 0;
      for (int r = 0; r < 4; r++) n += int'(d[r][c]);
      checks++;
      if (c >= luts.size() || luts[c] != n) begin
        failures++; $display("FAIL M=4 column %0d sum", c);
      end
    end
  endtask

  task automatic run16(input logic [3:0][15:0] d, input logic [1:0] cin);
    int cycles;
    longint exp_sum;
    int luts[$];
    @(negedge clk);
    d16 = d; cin16 = cin; load16 = 1'b1; start16 = 1'b1;
    #1 luts.push_back(int'(lut16));  // column 0 is added on the start edge
    @(posedge clk); #1;
    load16 = 1'b0; start16 = 1'b0; d16 = '0;
    cycles = 1;   // the start edge adds column 0
    while (!done16 && cycles < 100) begin
      if (busy16) luts.push_back(int'(lut16));
      @(posedge clk); #1; cycles++;
    end
    exp_sum = longint'(cin);
    for (int r = 0; r < 4; r++) exp_sum += longint'(d[r]);
    checks++;
    if (longint'(s16) != exp_sum) begin
      failures++; $display("FAIL M=16 %h sum=%h expected=%h", d, s16, exp_sum);
    end
    checks++;
    if (cycles != 17) begin
      failures++; $display("FAIL M=16 latency %0d, expected 17", cycles);
    end
    for (int c = 0; c < 16; c++) begin
      checks++;
      if (c >= luts.size() || luts[c] != ones_col(d, 4'(c))) begin
        failures++; $display("FAIL M=16 column %0d sum", c);
      end
    end
  endtask

  initial begin
    rst_n = 1'b0;
    load4 = 0; start4 = 0; d4 = '0; cin4 = '0;
    load16 = 0; start16 = 0; d16 = '0; cin16 = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // A + F + 1 + 2 = 1C
    run4({4'h2, 4'h1, 4'hF, 4'hA}, 2'd0, 1'b0);
    checks++;
    if (s4 !== 6'h1C) begin failures++; $display("FAIL example 1C: %h", s4); end
    // A234 + FFFF + 0A2D + FF7F = 2ABDF
    run16({16'hFF7F, 16'h0A2D, 16'hFFFF, 16'hA234}, 2'd0);
    checks++;
    if (s16 !== 18'h2ABDF) begin failures++; $display("FAIL example 2ABDF: %h", s16); end
    // largest operands
    run4({4{4'hF}}, 2'd0, 1'b0);
    run16({4{16'hFFFF}}, 2'd0);
    // separate load and start, and a carry_in
    run4({4'h3, 4'h9, 4'h7, 4'hC}, 2'd3, 1'b1);
    for (int i = 0; i < 200; i++) begin
      run4({4'($urandom), 4'($urandom), 4'($urandom), 4'($urandom)}, 2'($urandom), 1'($urandom));
      run16({16'($urandom), 16'($urandom), 16'($urandom), 16'($urandom)}, 2'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
