// moa_addn_harness: drives one N-operand adder and checks it.
//
// Used by tb_moa_addn. It runs NSETS additions on its own moa_addn instance:
// all operands at their maximum (the largest carry, N-1), all zero, then
// random operand sets (every third with the top operand bits forced high, to
// make large carries common). Each result is compared with the integer sum
// of the operands and the clocks from the start edge to done with LATENCY.
// load and start are given together or one clock apart, at random; the next
// start is given in the clock in which done rises. It also counts how often
// the mechanisms of the adder occur, worked out from the operands:
//   mech[0] a level-1 module carries,     mech[1] a sum module above level 1 carries,
//   mech[2] the total carry reaches N-1,  mech[3] load and start one clock apart,
//   mech[4] additions issued back to back.
// When finished it raises finished with its counts on checks and failures.
module moa_addn_harness #(
  parameter int unsigned N        = 16,
  parameter int unsigned M        = 16,
  parameter bit          PARALLEL = 1'b0,
  parameter int unsigned LATENCY  = 41,
  parameter int unsigned NSETS    = 100
) (
  input  logic     clk,
  input  logic     rst_n,
  output int       checks,
  output int       failures,
  output int       mech [5],
  output logic     finished
);
  localparam int unsigned SW = moa_pkg::sum_bits(N, M);

  logic              load, start, busy, done;
  logic [N-1:0][M-1:0] d;
  logic [SW-1:0]     s;

  moa_addn #(.N(N), .M(M), .PARALLEL(PARALLEL)) dut (
    .clk(clk), .rst_n(rst_n), .load(load), .start(start), .data_in(d),
    .sum_out(s), .busy(busy), .done(done));

  initial begin : run
    logic [N-1:0][M-1:0] v;
    checks = 0; failures = 0; finished = 1'b0;
    foreach (mech[i]) mech[i] = 0;
    load = 0; start = 0; d = '0;
    @(posedge rst_n);
    @(negedge clk);
    for (int t = 0; t < NSETS; t++) begin
      int cycles;
      bit separate;
      longint exp_sum, l1c;
      if (t == 0)      v = '1;
      else if (t == 1) v = '0;
      else
        for (int k = 0; k < N; k++)
          v[k] = (t % 3 == 0) ? M'({$urandom, $urandom} | (64'h7 << (M - 3))) : M'({$urandom, $urandom});
      separate = (t > 1) && ($urandom % 2 == 1);
      if (!separate && t > 0) mech[4]++;
      d = v; load = 1'b1; start = !separate;
      if (separate) begin
        @(posedge clk); #1;
        load = 1'b0; d = '0; start = 1'b1;
        mech[3]++;
      end
      checks++;
      if (busy) begin failures++; $display("FAIL N=%0d busy at issue", N); end
      @(posedge clk); #1;
      load = 1'b0; start = 1'b0; d = '0;
      cycles = 1;
      while (!done && cycles < 1000) begin
        @(posedge clk); #1; cycles++;
      end
      // reference
      exp_sum = 0; l1c = 0;
      for (int j = 0; j < N / 4; j++) begin
        longint part;
        part = 0;
        for (int k = 0; k < 4; k++) part += longint'(v[4*j + k]);
        l1c += part >> M;
        exp_sum += part;
      end
      if (l1c != 0) mech[0]++;
      if ((exp_sum >> M) == longint'(N) - 1) mech[2]++;
      begin
        // some sum module above level 1 carries: the low M bits of the
        // level-1 results add up to 2^M or more
        longint low;
        low = 0;
        for (int j = 0; j < N / 4; j++) begin
          longint part;
          part = 0;
          for (int k = 0; k < 4; k++) part += longint'(v[4*j + k]);
          low += part & ((64'd1 << M) - 1);
        end
        if ((low >> M) != 0) mech[1]++;
      end
      checks += 2;
      if (longint'(s) != exp_sum) begin
        failures++;
        $display("FAIL N=%0d P=%0d set %0d sum=%h expected=%h", N, PARALLEL, t, s, exp_sum);
      end
      if (cycles != int'(LATENCY)) begin
        failures++;
        $display("FAIL N=%0d P=%0d latency %0d, expected %0d", N, PARALLEL, cycles, LATENCY);
      end
    end
    finished = 1'b1;
  end
endmodule
