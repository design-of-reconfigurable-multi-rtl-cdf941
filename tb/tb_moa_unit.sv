// tb_moa_unit: self-checking test of the clocked 4xM adder module.
//
// Instantiates the module twice at M = 16: with the serial adder (the
// default) and with the parallel adder. The same operand sets go to both;
// each result is compared with the integer sum and the clocks from start to
// done are checked: M+1 = 17 for the serial module, 1 for the parallel one.
// Load and start are given both together and one clock apart.
module tb_moa_unit;
  localparam int unsigned M = 16;
  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic              load, start;
  logic [3:0][M-1:0] d;
  logic [M+1:0]      s_ser, s_par;
  logic              busy_ser, busy_par, done_ser, done_par;

  moa_unit dut_ser (
    .clk(clk), .rst_n(rst_n), .load(load), .start(start), .data_in(d),
    .sum_out(s_ser), .busy(busy_ser), .done(done_ser));
  moa_unit #(.M(M), .PARALLEL(1'b1)) dut_par (
    .clk(clk), .rst_n(rst_n), .load(load), .start(start), .data_in(d),
    .sum_out(s_par), .busy(busy_par), .done(done_par));

  task automatic run(input logic [3:0][M-1:0] v, input bit separate);
    int cycles, lat_par;
    longint exp_sum;
    @(negedge clk);
    d = v; load = 1'b1; start = !separate;
    if (separate) begin
      @(negedge clk);
      load = 1'b0; d = '0; start = 1'b1;
    end
    @(posedge clk); #1;
    load = 1'b0; start = 1'b0; d = '0;
    cycles = 1;
    lat_par = done_par ? 1 : 0;
    while (!done_ser && cycles < 100) begin
      @(posedge clk); #1; cycles++;
    end
    exp_sum = 0;
    for (int r = 0; r < 4; r++) exp_sum += longint'(v[r]);
    checks += 4;
    if (longint'(s_ser) != exp_sum) begin
      failures++; $display("FAIL serial %h sum=%h expected=%h", v, s_ser, exp_sum);
    end
    if (longint'(s_par) != exp_sum) begin
      failures++; $display("FAIL parallel %h sum=%h expected=%h", v, s_par, exp_sum);
    end
    if (cycles != M + 1) begin
      failures++; $display("FAIL serial latency %0d", cycles);
    end
    if (lat_par != 1) begin
      failures++; $display("FAIL parallel latency");
    end
  endtask

  initial begin
    rst_n = 1'b0; load = 0; start = 0; d = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    run({16'hFF7F, 16'h0A2D, 16'hFFFF, 16'hA234}, 1'b0);
    run({4{16'hFFFF}}, 1'b1);
    for (int i = 0; i < 300; i++)
      run({16'($urandom), 16'($urandom), 16'($urandom), 16'($urandom)}, 1'($urandom));
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
