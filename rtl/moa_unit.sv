// moa_unit: the clocked 4xM adder module from which larger adders are built.
//
// One module adds four unsigned M-bit operands into an (M+2)-bit sum. The
// parameter PARALLEL selects its implementation:
//   PARALLEL = 0  the serial adder (one column per clock, Algorithm-2),
//                 done M+1 clocks after start;
//   PARALLEL = 1  an input buffer, the combinational parallel adder and a
//                 result register, done one clock after start.
// Both share one handshake (this design's own): load captures the operands,
// start begins the addition, done rises with the result and stays high until
// the next start. load and start may be asserted in the same clock; the
// operands then go straight into the addition. start must not be asserted
// while busy. Reset is synchronous and active low.
module moa_unit #(
  parameter int unsigned M        = 16,
  parameter bit          PARALLEL = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic              start,
  input  logic [3:0][M-1:0] data_in,
  output logic [M+1:0]      sum_out,
  output logic              busy,
  output logic              done
);
  if (PARALLEL) begin : g_par
    logic [3:0][M-1:0] in_buf;
    logic [3:0][M-1:0] operands;
    logic [M+1:0]      comb_sum;

    assign operands = load ? data_in : in_buf;
    par_add4xm #(.M(M)) u_add (.data_in(operands), .sum_out(comb_sum));

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        in_buf  <= '0;
        sum_out <= '0;
        done    <= 1'b0;
      end else begin
        if (load) in_buf <= data_in;
        if (start) begin
          sum_out <= comb_sum;
          done    <= 1'b1;
        end
      end
    end
    assign busy = 1'b0;
  end else begin : g_ser
    logic [2:0] lut_unused;
    serial_add4xm #(.M(M)) u_add (
      .clk(clk), .rst_n(rst_n), .load(load), .start(start),
      .data_in(data_in), .carry_in(2'b00),
      .sum_out(sum_out), .lut_out(lut_unused), .busy(busy), .done(done));
  end
endmodule
