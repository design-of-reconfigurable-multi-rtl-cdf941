// tb_moa_addn: end-to-end test of the N-operand adder in six shapes.
//
//   N = 16, serial modules (the default)    latency 17+1+17+1+5      = 41
//   N = 16, parallel modules                latency 2L+1, L = 2      = 5
//   N = 64, serial modules                  latency 3*(17+1) + 7     = 61
//   N = 64, parallel modules                latency 2L+1, L = 3      = 7
//   N = 256, serial modules                 latency 4*(17+1) + 9     = 81
//   N = 256, parallel modules               latency 2L+1, L = 4      = 9
// (M = 16 throughout; for N = 64 the carry modules are 6 bits wide when
// serial and 8 bits wide when parallel, for N = 256 8 bits wide.) Each shape is driven by its own
// moa_addn_harness, which compares every sum with the integer sum of the
// operands and checks the latency. The worked 16-operand example, whose sum
// is 20357 (hex), is also run on the default adder. The testbench fails if
// any mechanism counted by the harnesses never occurred: a level-1 carry,
// a carry out of a sum module above level 1, the largest total carry N-1, split
// load and start, back-to-back issue; and if either module kind is unused.
module tb_moa_addn;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int hc [6], hf [6];
  int hm [6][5];
  logic [5:0] fin;

  moa_addn_harness #(.N(16), .M(16), .PARALLEL(1'b0), .LATENCY(41), .NSETS(120)) h0 (
    .clk(clk), .rst_n(rst_n), .checks(hc[0]), .failures(hf[0]), .mech(hm[0]), .finished(fin[0]));
  moa_addn_harness #(.N(16), .M(16), .PARALLEL(1'b1), .LATENCY(5),  .NSETS(120)) h1 (
    .clk(clk), .rst_n(rst_n), .checks(hc[1]), .failures(hf[1]), .mech(hm[1]), .finished(fin[1]));
  moa_addn_harness #(.N(64), .M(16), .PARALLEL(1'b0), .LATENCY(61), .NSETS(60)) h2 (
    .clk(clk), .rst_n(rst_n), .checks(hc[2]), .failures(hf[2]), .mech(hm[2]), .finished(fin[2]));
  moa_addn_harness #(.N(64), .M(16), .PARALLEL(1'b1), .LATENCY(7),  .NSETS(120)) h3 (
    .clk(clk), .rst_n(rst_n), .checks(hc[3]), .failures(hf[3]), .mech(hm[3]), .finished(fin[3]));
  moa_addn_harness #(.N(256), .M(16), .PARALLEL(1'b0), .LATENCY(81), .NSETS(30)) h4 (
    .clk(clk), .rst_n(rst_n), .checks(hc[4]), .failures(hf[4]), .mech(hm[4]), .finished(fin[4]));
  moa_addn_harness #(.N(256), .M(16), .PARALLEL(1'b1), .LATENCY(9),  .NSETS(60)) h5 (
    .clk(clk), .rst_n(rst_n), .checks(hc[5]), .failures(hf[5]), .mech(hm[5]), .finished(fin[5]));

  // the worked example on a default adder
  logic               ex_load, ex_start, ex_busy, ex_done;
  logic [15:0][15:0]  ex_d;
  logic [19:0]        ex_s;
  moa_addn ex_dut (
    .clk(clk), .rst_n(rst_n), .load(ex_load), .start(ex_start), .data_in(ex_d),
    .sum_out(ex_s), .busy(ex_busy), .done(ex_done));

  initial begin
    int cycles;
    ex_load = 0; ex_start = 0; ex_d = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    @(negedge clk);
    ex_d = {16'h21AD, 16'h12DC, 16'h0A00, 16'h0908, 16'h3123, 16'h01A3, 16'h1234, 16'h2134,
            16'h1010, 16'h1129, 16'h1020, 16'h0100, 16'h0340, 16'h0700, 16'h1900, 16'hFFFF};
    ex_load = 1'b1; ex_start = 1'b1;
    @(posedge clk); #1;
    ex_load = 1'b0; ex_start = 1'b0;
    cycles = 1;
    while (!ex_done && cycles < 200) begin @(posedge clk); #1; cycles++; end
    checks += 2;
    if (ex_s !== 20'h20357) begin failures++; $display("FAIL example sum %h", ex_s); end
    if (cycles != 41)       begin failures++; $display("FAIL example latency %0d", cycles); end
    $display("example: sum %h after %0d clocks", ex_s, cycles);

    wait (&fin);
    for (int h = 0; h < 6; h++) begin
      checks += hc[h];
      failures += hf[h];
      $display("shape %0d: checks %0d failures %0d, mechanisms %0d %0d %0d %0d %0d",
               h, hc[h], hf[h], hm[h][0], hm[h][1], hm[h][2], hm[h][3], hm[h][4]);
      for (int k = 0; k < 5; k++) begin
        checks++;
        if (hm[h][k] == 0) begin
          failures++; $display("FAIL shape %0d: mechanism %0d never occurred", h, k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
