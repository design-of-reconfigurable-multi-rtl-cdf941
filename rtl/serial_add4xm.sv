// serial_add4xm: 4-operand, M-bit serial adder (column by column).
//
// Adds four M-bit unsigned operands one column per clock with a single 4x3
// LUT and a 3-bit adder, following the paper's Algorithm-2: the LUT counts
// the ones of column i, the 3-bit adder adds the 2-bit carry buffer, bit 0 of
// the result becomes bit i of the sum and bits 2:1 are written back to the
// carry buffer. After the last column the carry buffer is copied into the
// two top bits of the sum, giving an (M+2)-bit result. Two carry bits are
// enough because the carry of a 4-operand addition never exceeds 3.
//
// Interface and timing (the handshake is this design's own choice):
//   load   captures data_in into the input buffer, carry_in into the carry
//          buffer and clears the sum buffer. With carry_in = 0 this is the
//          paper's "clear carry buffer". load and start may come together;
//          the operands then feed column 0 directly.
//   start  (sampled while not busy) begins the addition. Column 0 is added
//          on the start clock edge, columns 1..M-1 on the next M-1 edges and
//          the carry is copied on the edge after that: the addition takes
//          M+1 clock edges counting the start edge (5 for M = 4, 17 for
//          M = 16, the paper's M+1 clocks), and done is high after the last.
//   done   stays high, with sum_out valid, until the next start.
//   lut_out shows the column sum being added (0 when idle).
// The input buffer is a shift register per operand that moves the next
// column into bit 0 every clock. Reset is synchronous and active low.
// M must be at least 2.
module serial_add4xm #(
  parameter int unsigned M = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic                 start,
  input  logic [3:0][M-1:0]    data_in,   // data_in[r] is operand r
  input  logic [1:0]           carry_in,
  output logic [M+1:0]         sum_out,
  output logic [2:0]           lut_out,
  output logic                 busy,
  output logic                 done
);
  import moa_pkg::*;

  localparam int unsigned CW = $clog2(M + 2);   // indexes all M+2 sum bits

  unit_state_e       state;
  logic [3:0][M-1:0] in_buf;
  logic [1:0]        carry_buf;
  logic [M+1:0]      z_buf;
  logic [CW-1:0]     col;

  logic              take;        // operands come straight from data_in
  logic [3:0][M-1:0] operands;
  logic [1:0]        carry_cur;
  logic [3:0]        column;
  logic [2:0]        lut_sum;
  logic [2:0]        total;

  assign take      = (state == U_IDLE) && load;
  assign operands  = take ? data_in  : in_buf;
  assign carry_cur = take ? carry_in : carry_buf;

  // Column i sits in bit 0 of the shifting input buffer.
  always_comb
    for (int r = 0; r < 4; r++) column[r] = operands[r][0];

  lut4x3 u_lut (.in_bits(column), .out_sum(lut_sum));
  adder3 u_add (.lut_sum(lut_sum), .carry(carry_cur), .total(total));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= U_IDLE;
      in_buf    <= '0;
      carry_buf <= '0;
      z_buf     <= '0;
      col       <= '0;
      done      <= 1'b0;
    end else begin
      unique case (state)
        U_IDLE: begin
          if (start) begin
            // column 0
            z_buf     <= (M+2)'(total[0]);
            carry_buf <= total[2:1];
            for (int r = 0; r < 4; r++) in_buf[r] <= operands[r] >> 1;
            col       <= CW'(1);
            state     <= U_RUN;
            done      <= 1'b0;
          end else if (load) begin
            in_buf    <= data_in;
            carry_buf <= carry_in;
            z_buf     <= '0;
          end
        end
        U_RUN: begin
          z_buf[col] <= total[0];
          carry_buf  <= total[2:1];
          for (int r = 0; r < 4; r++) in_buf[r] <= in_buf[r] >> 1;
          if (col == CW'(M - 1)) state <= U_FINAL;
          col <= col + 1'b1;
        end
        U_FINAL: begin
          z_buf[M+1:M] <= carry_buf;
          state        <= U_IDLE;
          done         <= 1'b1;
        end
        default: state <= U_IDLE;
      endcase
    end
  end

  assign sum_out = z_buf;
  assign lut_out = (state == U_RUN || (state == U_IDLE && start)) ? lut_sum : 3'd0;
  assign busy    = (state != U_IDLE);

  // A start while busy would be ignored: the caller broke the handshake.
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                    busy |-> !start)
    else $error("serial_add4xm: start while busy");
endmodule
