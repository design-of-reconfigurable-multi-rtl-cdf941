// tb_moa_addn_full: the N-operand adder at its default configuration.
//
// The adder is instantiated with no parameter overrides (N = 16, M = 16, serial
// 4xM modules). It adds the worked example of sixteen 16-bit operands,
// whose sum is 20357 (hex), then sixteen operands of FFFF (sum FFFF0, the
// largest carry, 15) and 50 random operand sets, issued back to back: each
// new start is given in the clock in which done rises. Every result is
// compared with the integer sum and every addition must take 41 clocks.
module tb_moa_addn_full;
  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic               load, start;
  logic [15:0][15:0]  d;
  logic [19:0]        s;
  logic               busy, done;

  moa_addn dut (
    .clk(clk), .rst_n(rst_n), .load(load), .start(start), .data_in(d),
    .sum_out(s), .busy(busy), .done(done));

  logic [15:0][15:0] sets[$];

  initial begin
    logic [15:0][15:0] v;
    rst_n = 1'b0; load = 0; start = 0; d = '0;
    sets.push_back({16'h21AD, 16'h12DC, 16'h0A00, 16'h0908, 16'h3123, 16'h01A3, 16'h1234, 16'h2134,
                    16'h1010, 16'h1129, 16'h1020, 16'h0100, 16'h0340, 16'h0700, 16'h1900, 16'hFFFF});
    sets.push_back({16{16'hFFFF}});
    for (int i = 0; i < 50; i++) begin
      for (int k = 0; k < 16; k++) v[k] = 16'($urandom);
      sets.push_back(v);
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    @(negedge clk);
    foreach (sets[i]) begin
      int cycles;
      longint exp_sum;
      // issue: load and start together (busy is low here)
      d = sets[i]; load = 1'b1; start = 1'b1;
      checks++;
      if (busy) begin failures++; $display("FAIL busy at issue %0d", i); end
      @(posedge clk); #1;
      load = 1'b0; start = 1'b0; d = '0;
      cycles = 1;
      while (!done && cycles < 200) begin
        @(posedge clk); #1; cycles++;
      end
      exp_sum = 0;
      foreach (sets[i][k]) exp_sum += longint'(sets[i][k]);
      checks += 2;
      if (longint'(s) != exp_sum) begin
        failures++; $display("FAIL set %0d sum=%h expected=%h", i, s, exp_sum);
      end
      if (cycles != 41) begin
        failures++; $display("FAIL set %0d latency %0d, expected 41", i, cycles);
      end
      if (i == 0) begin
        checks++;
        if (s !== 20'h20357) begin failures++; $display("FAIL example sum %h", s); end
        $display("example: sum %h after %0d clocks", s, cycles);
      end
      // next start goes in during the clock in which done is high
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
