// mc_2sort: metastability-containing 2-sort of two B-bit Gray-code inputs.
//
// Inputs are binary reflected Gray codes that may be "valid strings": at most
// one bit is metastable, and only a bit whose value decides between two
// neighbouring codes x and x+1. Such a string is ordered between x and x+1.
// The circuit outputs gmax = max(g, h) and hmin = min(g, h) in that order,
// and when an input is metastable the outputs are exactly as metastable as
// the order allows (the metastable closure of max and min) - no
// synchronizer, no clock, only AND, OR and inverter gates.
//
// Structure (most significant bit = position 0):
//   - positions 0..B-2 form the prefix inputs (NOT g_k, h_k), the first state
//     bit inverted so that the state is in N form (B-1 inverters);
//   - mc_ppc(B-1) computes the comparison states after every prefix;
//   - position 0's output sees the initial state "equal, even parity", so
//     max_0 = g_0 OR h_0 and min_0 = g_0 AND h_0;
//   - position k >= 1 is an mc_out cell fed with the state after positions
//     0..k-1 and with (g_k, h_k).
// For B = 16 this is 15 + 2 + 150 + 240 = 407 gates, depth O(log B). The
// structure is the published one. Bit order is this design's choice: g[B-1]
// is the first (most significant) Gray-code bit.
//
// Interface: g, h in; gmax, hmin out; every bit RAILS wide (see mc_pkg).
// Purely combinational: outputs follow inputs after the gate delays.
module mc_2sort #(
  parameter int unsigned B     = 16,
  parameter int unsigned RAILS = 1
) (
  input  logic [B-1:0][RAILS-1:0] g,
  input  logic [B-1:0][RAILS-1:0] h,
  output logic [B-1:0][RAILS-1:0] gmax,
  output logic [B-1:0][RAILS-1:0] hmin
);
  // Most significant position: initial state 00, out reduces to OR / AND.
  mc_or2  #(.RAILS(RAILS)) u_max0 (.a(g[B-1]), .b(h[B-1]), .y(gmax[B-1]));
  mc_and2 #(.RAILS(RAILS)) u_min0 (.a(g[B-1]), .b(h[B-1]), .y(hmin[B-1]));

  if (B >= 2) begin : g_prefix
    logic [B-2:0][1:0][RAILS-1:0] delta, pi;

    for (genvar k = 0; k < B - 1; k++) begin : g_in
      mc_inv #(.RAILS(RAILS)) u_ginv (.a(g[B-1-k]), .y(delta[k][1]));
      assign delta[k][0] = h[B-1-k];
    end

    mc_ppc #(.N(B-1), .RAILS(RAILS)) u_ppc (.d(delta), .p(pi));

    for (genvar k = 1; k < B; k++) begin : g_out
      mc_out #(.RAILS(RAILS)) u_out (
        .ns(pi[k-1]), .g(g[B-1-k]), .h(h[B-1-k]),
        .gmax(gmax[B-1-k]), .hmin(hmin[B-1-k])
      );
    end
  end
endmodule
