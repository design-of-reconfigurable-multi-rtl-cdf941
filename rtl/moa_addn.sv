// moa_addn: N-operand, M-bit adder assembled from 4-operand adder modules.
//
// Adds N unsigned M-bit operands (N = 4^L, 16 <= N <= 256) into an
// (M + clog2(N))-bit sum using only 4xM adder modules (moa_unit). Each
// module's (M+2)-bit result is split into a sum S (low M bits) and a 2-bit
// carry C of weight 2^M. Three kinds of module are arranged in levels:
//   A[i]  sum modules, levels 1..L: level 1 adds the operands four at a
//         time, level i adds the S outputs of level i-1 four at a time,
//         until level L has a single module whose S is the low M bits of
//         the result;
//   C[i]  carry modules, levels 2..L: they add, four at a time, the C
//         outputs of the sum modules of level i-1 and the S outputs of the
//         carry modules of level i-1 (zero-padded);
//   B     level L+1: adds the carry of A[L] and the sums of the carry
//         modules of level L. Its sum is the top clog2(N) bits of the
//         result.
// Every carry of the sum tree therefore enters the carry tree exactly once,
// all with the same weight 2^M, and since the total carry of an N-operand
// addition is at most N-1, every carry module's sum fits in clog2(N) bits
// and no carry module carries out. For N = 16 this is the arrangement
// U1..U4 (A[1]), U5 (A[2]), U6 (C[2]) and U7 (B); it is the default.
//
// The arrangement follows the paper's reconfiguration algorithm; the
// sequencing is this design's own. All modules of a level start together,
// one clock after every module of the level before has finished (a
// registered hand-over state), with load and start given together. With
// serial modules (PARALLEL = 0, the default) a level of 4xM sum modules takes
// M+1 clock edges and a level holding only carry modules CU+1 edges, where
// CU is the carry-module width; N = 16, M = 16 takes 17 + 1 + 17 + 1 + 5 = 41
// clock edges from the start edge to done, the count the paper reports for
// its 16x16 adder. With parallel modules (PARALLEL = 1) each level takes one
// edge: 2L+1 edges in all.
//
// Interface: load captures data_in into the level-1 modules; start begins an
// addition and may come with load. A start is accepted whenever busy is low,
// including the clock in which done rises. done stays high with sum_out
// valid until the next start. Reset is synchronous and active low.
module moa_addn
  import moa_pkg::*;
#(
  parameter int unsigned N        = 16,
  parameter int unsigned M        = 16,
  parameter bit          PARALLEL = 1'b0
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        load,
  input  logic                        start,
  input  logic [N-1:0][M-1:0]         data_in,   // data_in[i] is operand i
  output logic [sum_bits(N, M)-1:0]   sum_out,
  output logic                        busy,
  output logic                        done
);
  localparam int unsigned L  = sum_levels(N);
  localparam int unsigned CW = carry_bits(N);                   // carry-sum width
  localparam int unsigned CU = PARALLEL ? 4 * ((CW + 3) / 4) : CW; // carry-module width
  localparam int unsigned NA = sum_mod_base(N, L + 1);          // all sum modules
  localparam int unsigned NC = carry_mod_base(N, L + 1);        // all carry modules
  localparam int unsigned NB = 1 + n_carry_mod(N, L);           // B's used inputs
  localparam int unsigned LW = $clog2(L + 2);

  // The shape must be a full tree whose last carries fit one module.
  if (N != (1 << (2 * L)) || L < 2 || NB > 4) begin : g_bad_n
    $error("moa_addn: N must be 16, 64 or 256");
  end

  seq_state_e     state;
  logic [LW-1:0]  lvl;
  logic           ready;
  logic [L+1:1]   lvl_start;     // start (and load) for each level
  logic [L+1:1]   lvl_done;      // every module of the level is done

  logic [NA-1:0][M+1:0]  a_sum;
  logic [NA-1:0]         a_done, a_busy;
  logic [NC-1:0][CU+1:0] c_sum;
  logic [NC-1:0]         c_done, c_busy;
  logic [CU+1:0]         b_sum;
  logic                  b_done, b_busy;

  // ---------------- level 1: sum modules on the operands ----------------
  for (genvar j = 0; j < N / 4; j++) begin : g_a1
    moa_unit #(.M(M), .PARALLEL(PARALLEL)) u_add (
      .clk(clk), .rst_n(rst_n), .load(load), .start(lvl_start[1]),
      .data_in(data_in[4*j +: 4]),
      .sum_out(a_sum[j]), .busy(a_busy[j]), .done(a_done[j]));
  end
  assign lvl_done[1] = &a_done[N/4-1:0];

  // ---------------- levels 2..L: sum and carry modules ------------------
  for (genvar i = 2; i <= L; i++) begin : g_lvl
    localparam int unsigned RA   = n_sum_mod(N, i);      // sum modules here
    localparam int unsigned AB   = sum_mod_base(N, i);   // their first index
    localparam int unsigned PAB  = sum_mod_base(N, i-1); // level i-1 sum modules
    localparam int unsigned RC   = n_carry_mod(N, i);    // carry modules here
    localparam int unsigned CB   = carry_mod_base(N, i);
    localparam int unsigned PCN  = n_carry_mod(N, i-1);  // level i-1 carry modules
    localparam int unsigned PCB  = carry_mod_base(N, i-1);

    logic [RA-1:0] done_a;
    logic [RC-1:0] done_c;

    for (genvar j = 0; j < RA; j++) begin : g_a
      logic [3:0][M-1:0] ops;
      for (genvar k = 0; k < 4; k++) begin : g_op
        assign ops[k] = a_sum[PAB + 4*j + k][M-1:0];
      end
      moa_unit #(.M(M), .PARALLEL(PARALLEL)) u_add (
        .clk(clk), .rst_n(rst_n), .load(lvl_start[i]), .start(lvl_start[i]),
        .data_in(ops),
        .sum_out(a_sum[AB + j]), .busy(a_busy[AB + j]), .done(a_done[AB + j]));
      assign done_a[j] = a_done[AB + j];
    end

    // first RA carry modules: carries of the level i-1 sum modules
    for (genvar j = 0; j < RA; j++) begin : g_cs
      logic [3:0][CU-1:0] ops;
      for (genvar k = 0; k < 4; k++) begin : g_op
        assign ops[k] = CU'(a_sum[PAB + 4*j + k][M+1:M]);
      end
      moa_unit #(.M(CU), .PARALLEL(PARALLEL)) u_add (
        .clk(clk), .rst_n(rst_n), .load(lvl_start[i]), .start(lvl_start[i]),
        .data_in(ops),
        .sum_out(c_sum[CB + j]), .busy(c_busy[CB + j]), .done(c_done[CB + j]));
      assign done_c[j] = c_done[CB + j];
    end

    // remaining carry modules: sums of the level i-1 carry modules
    for (genvar j = RA; j < RC; j++) begin : g_cc
      logic [3:0][CU-1:0] ops;
      for (genvar k = 0; k < 4; k++) begin : g_op
        if (4*(j-RA) + k < PCN) begin : g_used
          assign ops[k] = c_sum[PCB + 4*(j-RA) + k][CU-1:0];
        end else begin : g_zero
          assign ops[k] = '0;
        end
      end
      moa_unit #(.M(CU), .PARALLEL(PARALLEL)) u_add (
        .clk(clk), .rst_n(rst_n), .load(lvl_start[i]), .start(lvl_start[i]),
        .data_in(ops),
        .sum_out(c_sum[CB + j]), .busy(c_busy[CB + j]), .done(c_done[CB + j]));
      assign done_c[j] = c_done[CB + j];
    end

    assign lvl_done[i] = (&done_a) && (&done_c);
  end

  // ---------------- level L+1: the final carry module B -----------------
  logic [3:0][CU-1:0] b_ops;
  for (genvar k = 0; k < 4; k++) begin : g_b_op
    if (k == 0) begin : g_top_carry
      assign b_ops[k] = CU'(a_sum[NA-1][M+1:M]);
    end else if (k < NB) begin : g_carry_sum
      assign b_ops[k] = c_sum[carry_mod_base(N, L) + k - 1][CU-1:0];
    end else begin : g_zero
      assign b_ops[k] = '0;
    end
  end
  moa_unit #(.M(CU), .PARALLEL(PARALLEL)) u_b (
    .clk(clk), .rst_n(rst_n), .load(lvl_start[L+1]), .start(lvl_start[L+1]),
    .data_in(b_ops), .sum_out(b_sum), .busy(b_busy), .done(b_done));
  assign lvl_done[L+1] = b_done;

  // ---------------- sequencer ----------------
  assign ready = (state == S_IDLE) ||
                 (state == S_RUN && lvl == LW'(L + 1) && b_done);

  always_comb begin
    lvl_start    = '0;
    lvl_start[1] = start && ready;
    for (int i = 2; i <= L + 1; i++)
      if (state == S_GO && lvl == LW'(i)) lvl_start[i] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      lvl   <= '0;
    end else if (start && ready) begin
      state <= S_RUN;
      lvl   <= LW'(1);
    end else begin
      unique case (state)
        S_IDLE: ;
        S_RUN:
          if (lvl == LW'(L + 1)) begin
            if (b_done) state <= S_IDLE;
          end else if (lvl_done[lvl]) begin
            state <= S_GO;
            lvl   <= lvl + 1'b1;
          end
        S_GO:    state <= S_RUN;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign sum_out = {b_sum[CW-1:0], a_sum[NA-1][M-1:0]};
  assign busy    = !ready;
  assign done    = ready && b_done;

  // Carry bound: no carry module produces a carry beyond clog2(N) bits.
  a_b_no_carry: assert property (@(posedge clk) disable iff (!rst_n)
                                 b_done |-> (b_sum >> CW) == '0)
    else $error("moa_addn: final carry module overflowed");
  a_units_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 ready |-> !(|a_busy || |c_busy || b_busy))
    else $error("moa_addn: ready while a module is busy");
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                    busy |-> !start)
    else $error("moa_addn: start while busy");
endmodule
