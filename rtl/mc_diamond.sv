// mc_diamond: the prefix operator of the 2-sort, "hat-diamond_M".
//
// Comparing two Gray-code strings g and h bit by bit, most significant bit
// first, is a four-state automaton. Its state after bits 1..i says: equal so
// far with even parity (00), equal so far with odd parity (11), g < h (01),
// g > h (10). The states 01 and 10 are absorbing; from 00 an input pair g_i h_i
// is adopted as the new state; from 11 the inverted input pair is adopted.
// The transition function, seen as an operator "diamond" on 2-bit values, is
// associative, so all prefix states can be computed by a parallel prefix
// circuit. For valid inputs (Gray codes with at most one metastable bit at a
// position where x and x+1 differ) the gate-level version here also composes
// correctly when inputs are metastable.
//
// The circuit works on the "N form" of the state, N(x1 x2) = (NOT x1) x2,
// because that saves inverters: both operands and the result are in N form.
// Each output bit is one mc_select:
//   y[1] = NOT(s diamond b)_1 = select(a = s2, b = NOT s1, sel1 = sel2 = NOT b1)
//   y[0] =     (s diamond b)_2 = select(a = s2, b = NOT s1, sel1 = sel2 = b2)
// that is NOT(s diamond b)_1 = NOT s1 (s2 + NOT b1) + s2 b1 and
// (s diamond b)_2 = NOT s1 (s2 + b2) + s2 NOT b2, 4 AND, 4 OR, 2 inverters,
// three gate levels. This is the published construction.
//
// Interface: s is the left operand (the earlier prefix), b the right operand,
// y = s hat-diamond b. Index [1] is the first (inverted) state bit, index [0]
// the second; each bit is RAILS bits wide (see mc_pkg). Combinational.
module mc_diamond #(
  parameter int unsigned RAILS = 1
) (
  input  logic [1:0][RAILS-1:0] s,
  input  logic [1:0][RAILS-1:0] b,
  output logic [1:0][RAILS-1:0] y
);
  mc_select #(.RAILS(RAILS)) u_bit1 (
    .a(s[0]), .b(s[1]), .sel1(b[1]), .sel2(b[1]), .f(y[1])
  );
  mc_select #(.RAILS(RAILS)) u_bit2 (
    .a(s[0]), .b(s[1]), .sel1(b[0]), .sel2(b[0]), .f(y[0])
  );
endmodule
