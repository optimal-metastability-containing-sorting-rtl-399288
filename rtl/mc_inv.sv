// mc_inv: inverter cell of the metastability-containing netlist.
//
// An inverter maps 0 to 1, 1 to 0 and a metastable input to a metastable
// output. It is kept as its own instance so that it maps to one library INV
// cell.
//
// Interface: a in, y out, each RAILS bits wide (see mc_pkg). With RAILS = 1
// this is a plain inverter. With RAILS = 2 the input interval [lo, hi] becomes
// [~hi, ~lo]: each output rail is the inverse of the opposite input rail, so
// 0 <-> 1 and M stays M. Purely combinational, one gate delay.
module mc_inv #(
  parameter int unsigned RAILS = 1
) (
  input  logic [RAILS-1:0] a,
  output logic [RAILS-1:0] y
);
  if (RAILS != 1 && RAILS != 2) begin : g_bad_rails
    $error("mc_inv: RAILS must be 1 or 2");
  end

  for (genvar r = 0; r < RAILS; r++) begin : g_rail
    assign y[r] = ~a[RAILS-1-r];
  end
endmodule
