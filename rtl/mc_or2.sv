// mc_or2: two-input OR gate cell of the metastability-containing netlist.
//
// An OR with one stable 1 input drives a stable 1 whatever the other input
// does, so the cell computes the metastable closure of OR. Like mc_and2 it is
// kept as its own instance so that it maps to one library OR2 cell.
//
// Interface: a, b in, y out, each RAILS bits wide (see mc_pkg). With RAILS = 1
// this is a plain OR; with RAILS = 2 the dual-rail image ORs both rails,
// which is the three-valued OR. Purely combinational, one gate delay.
module mc_or2 #(
  parameter int unsigned RAILS = 1
) (
  input  logic [RAILS-1:0] a,
  input  logic [RAILS-1:0] b,
  output logic [RAILS-1:0] y
);
  if (RAILS != 1 && RAILS != 2) begin : g_bad_rails
    $error("mc_or2: RAILS must be 1 or 2");
  end

  assign y = a | b;
endmodule
