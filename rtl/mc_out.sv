// mc_out: the output operator of the 2-sort, "out_M".
//
// Given the comparison state s = s(i-1) after the bits above position i, and
// the input bits g_i, h_i, it produces bit i of max(g, h) and of min(g, h):
//   state 00 (equal, even parity): max = g OR h,  min = g AND h
//   state 11 (equal, odd parity):  max = g AND h, min = g OR h
//   state 10 (g > h):              max = g,       min = h
//   state 01 (g < h):              max = h,       min = g
// In formulas, with the state delivered in N form (NOT s1, s2):
//   max_i = (NOT s1 + g) h + NOT s2 g
//   min_i = s1 h + (s2 + h) g
// Each is one mc_select (one inverter, two AND, two OR):
//   max_i = select(a = g, b = h, sel1 = s2,     sel2 = NOT s1)
//   min_i = select(a = h, b = g, sel1 = NOT s1, sel2 = s2)
// These connections follow the formulas. The published connection table lists
// sel1 and sel2 the other way round for these two rows; with the selection
// circuit as drawn that would swap max and min in the equal-prefix states, so
// the formulas are followed here. With these connections the gate circuit
// equals the metastable closure of the operator for all 81 three-valued input
// combinations.
//
// Interface: ns = (NOT s1, s2) with [1] the first bit; g, h the input bits;
// gmax, hmin the output bits. Each bit is RAILS bits wide. Combinational,
// three gate levels.
module mc_out #(
  parameter int unsigned RAILS = 1
) (
  input  logic [1:0][RAILS-1:0] ns,
  input  logic [RAILS-1:0]      g,
  input  logic [RAILS-1:0]      h,
  output logic [RAILS-1:0]      gmax,
  output logic [RAILS-1:0]      hmin
);
  mc_select #(.RAILS(RAILS)) u_max (
    .a(g), .b(h), .sel1(ns[0]), .sel2(ns[1]), .f(gmax)
  );
  mc_select #(.RAILS(RAILS)) u_min (
    .a(h), .b(g), .sel1(ns[1]), .sel2(ns[0]), .f(hmin)
  );
endmodule
