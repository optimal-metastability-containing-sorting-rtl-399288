// mc_and2: two-input AND gate cell of the metastability-containing netlist.
//
// The MC circuits are built only from 2-input AND, 2-input OR and inverter
// cells, because for these cells the behaviour on a metastable input is known:
// an AND with one stable 0 input drives a stable 0 whatever the other input
// does, so the cell computes the metastable closure of AND. Keeping every gate
// of the netlist as its own instance lets synthesis map it one-to-one to a
// library AND2 cell instead of merging it into complex gates whose behaviour
// under metastability is unknown.
//
// Interface: a, b in, y out, each RAILS bits wide (see mc_pkg). With RAILS = 1
// this is a plain AND; with RAILS = 2 the dual-rail image ANDs both rails,
// which is the three-valued AND. Purely combinational, one gate delay.
module mc_and2 #(
  parameter int unsigned RAILS = 1
) (
  input  logic [RAILS-1:0] a,
  input  logic [RAILS-1:0] b,
  output logic [RAILS-1:0] y
);
  if (RAILS != 1 && RAILS != 2) begin : g_bad_rails
    $error("mc_and2: RAILS must be 1 or 2");
  end

  assign y = a & b;
endmodule
