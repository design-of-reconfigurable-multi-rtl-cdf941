// moa_pkg: constants and helper functions shared by the multi-operand adder.
//
// The sizing rules come from the carry bound of multi-operand addition: for N
// operands of M bits the carry into any column never exceeds N-1, so the carry
// needs clog2(N) bits and the complete sum fits in M + clog2(N) bits (18 bits
// for four 16-bit operands, 20 bits for sixteen). The 4-bit ones count is the
// column sum that the 4x3 look-up table produces. The tree-shape functions
// give the number of sum and carry modules on each level of the N-operand
// adder and their places in its flat module lists; the state enums are those
// of the 4xM module and of the N-operand sequencer. Nothing here is clocked.
package moa_pkg;

  // Width of the largest carry value N-1 (N >= 2).
  function automatic int unsigned carry_bits(input int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

  // Width of the sum of n operands of m bits each.
  function automatic int unsigned sum_bits(input int unsigned n, input int unsigned m);
    return m + carry_bits(n);
  endfunction

  // Column sum of four bits: the 4x3 look-up table written as a function.
  function automatic logic [2:0] ones4(input logic [3:0] b);
    return 3'(b[0]) + 3'(b[1]) + 3'(b[2]) + 3'(b[3]);
  endfunction

  // Handshake state of a clocked 4xM adder module.
  typedef enum logic [1:0] {
    U_IDLE  = 2'd0,
    U_RUN   = 2'd1,
    U_FINAL = 2'd2
  } unit_state_e;

  // Sequencer state of the N-operand adder.
  typedef enum logic [1:0] {
    S_IDLE = 2'd0,
    S_RUN  = 2'd1,     // the modules of level lvl are adding
    S_GO   = 2'd2      // one clock: load and start the modules of level lvl
  } seq_state_e;

  // Tree shape of the N-operand adder (N = 4^L). Level i = 1..L holds the
  // sum modules A[i], level i = 2..L also the carry modules C[i], and
  // level L+1 the single final carry module B.

  // L, the number of sum levels (N must be a power of 4, at least 16).
  function automatic int unsigned sum_levels(input int unsigned n);
    int unsigned l = 0;
    for (int unsigned v = n; v > 1; v = v / 4) l++;
    return l;
  endfunction

  // Sum modules at level i: N / 4^i.
  function automatic int unsigned n_sum_mod(input int unsigned n, input int unsigned i);
    return n >> (2 * i);
  endfunction

  // Carry modules at level i: one per four sum-module carries of level
  // i-1, plus one per four carry-module sums of level i-1.
  function automatic int unsigned n_carry_mod(input int unsigned n, input int unsigned i);
    int unsigned c = 0;
    for (int unsigned l = 2; l <= i; l++)
      c = n_sum_mod(n, l) + (c + 3) / 4;
    return c;
  endfunction

  // Index of the first sum module of level i in a flat list of all of them.
  function automatic int unsigned sum_mod_base(input int unsigned n, input int unsigned i);
    int unsigned b = 0;
    for (int unsigned l = 1; l < i; l++) b += n_sum_mod(n, l);
    return b;
  endfunction

  // Index of the first carry module of level i in a flat list of all of them.
  function automatic int unsigned carry_mod_base(input int unsigned n, input int unsigned i);
    int unsigned b = 0;
    for (int unsigned l = 2; l < i; l++) b += n_carry_mod(n, l);
    return b;
  endfunction

endpackage
