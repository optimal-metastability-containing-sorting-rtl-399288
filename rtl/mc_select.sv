// mc_select: the selection circuit, the one cell from which both operators of
// the 2-sort (the prefix operator and the output operator) are built.
//
//   f = (b AND (sel2 OR a)) OR (a AND NOT sel1)
//
// It is made of one inverter, two AND and two OR gates, three gate levels
// deep. The gate structure follows the published selection circuit: sel2 and
// a feed an OR whose result is ANDed with b, a is ANDed with the inverted
// sel1, and the two products are ORed. With sel1 = sel2 = s it is a
// metastability-containing multiplexer: f = s ? b : a, and f is stable
// whenever a = b are stable even if s is metastable.
//
// Interface: a, b, sel1, sel2 in, f out, each RAILS bits wide (see mc_pkg).
// Purely combinational.
module mc_select #(
  parameter int unsigned RAILS = 1
) (
  input  logic [RAILS-1:0] a,
  input  logic [RAILS-1:0] b,
  input  logic [RAILS-1:0] sel1,
  input  logic [RAILS-1:0] sel2,
  output logic [RAILS-1:0] f
);
  logic [RAILS-1:0] sel1_n, or_a, and_b, and_a;

  mc_inv #(.RAILS(RAILS)) u_inv  (.a(sel1),  .y(sel1_n));
  mc_or2 #(.RAILS(RAILS)) u_or1  (.a(sel2),  .b(a),      .y(or_a));
  mc_and2 #(.RAILS(RAILS)) u_and2 (.a(b),    .b(or_a),   .y(and_b));
  mc_and2 #(.RAILS(RAILS)) u_and1 (.a(a),    .b(sel1_n), .y(and_a));
  mc_or2 #(.RAILS(RAILS)) u_or2  (.a(and_b), .b(and_a),  .y(f));
endmodule
