// mc_ppc: parallel prefix circuit PPC(N) over the hat-diamond operator.
//
// Computes p[i] = d[0] op d[1] op ... op d[i] for all i < N with op =
// mc_diamond, using the recursive Ladner-Fischer construction:
//   1. pair neighbours: t[k] = d[2k] op d[2k+1] for k < floor(N/2); for odd N
//      the last input d[N-1] is passed on as t[ceil(N/2)-1];
//   2. solve PPC(ceil(N/2)) on t, giving q;
//   3. p[0] = d[0]; odd outputs p[2k+1] = q[k]; even outputs
//      p[2k] = q[k-1] op d[2k] for k >= 1, except that for odd N the last
//      output p[N-1] is q[ceil(N/2)-1].
// N = 1 is a wire. For N a power of two the circuit has (2 log2 N - 1)
// operator levels and 2N - log2 N - 2 operators. The construction is the
// published one. The recursion is unrolled: recursion level j works on
// ceil(N / 2^j) elements; an upward pass (g_up) forms the paired inputs of
// every level and a downward pass (g_dn) forms the prefixes of every level
// from those of the level above it. Level j of the unrolled form is exactly
// the j-th nested call of the recursive description.
//
// Interface: d[i] and p[i] are 2-bit states in N form ([1] first bit), each
// bit RAILS wide. Index 0 is the most significant position. p[0] is d[0]
// itself (the prefix of one element). Combinational, no clock.

module mc_ppc #(
  parameter int unsigned N     = 15,
  parameter int unsigned RAILS = 1
) (
  input  logic [N-1:0][1:0][RAILS-1:0] d,
  output logic [N-1:0][1:0][RAILS-1:0] p
);
  // Size of recursion level j: ceil(N / 2^j).
  function automatic int unsigned lvl_n(int unsigned j);
    int unsigned n;
    n = N;
    for (int unsigned i = 0; i < j; i++) n = (n + 1) / 2;
    return n;
  endfunction

  // Index of the innermost level (the one of size 1).
  function automatic int unsigned lvl_last();
    int unsigned j;
    j = 0;
    while (lvl_n(j) > 1) j++;
    return j;
  endfunction

  localparam int unsigned L = lvl_last();

  if (N == 0) begin : g_bad_n
    $error("mc_ppc: N must be at least 1");
  end

  // Upward pass: up of level j + 1 combines neighbouring pairs of level j.
  for (genvar j = 0; j <= L; j++) begin : g_up
    localparam int unsigned NJ = lvl_n(j);
    logic [NJ-1:0][1:0][RAILS-1:0] up;
    if (j == 0) begin : g_in
      assign up = d;
    end else begin : g_pair
      localparam int unsigned NP = lvl_n(j - 1);  // size of the level below
      for (genvar k = 0; k < NP / 2; k++) begin : g_op
        mc_diamond #(.RAILS(RAILS)) u_op (
          .s(g_up[j-1].up[2*k]), .b(g_up[j-1].up[2*k+1]), .y(up[k])
        );
      end
      if (NP % 2 == 1) begin : g_odd_in
        assign up[NJ-1] = g_up[j-1].up[NP-1];
      end
    end
  end

  // Downward pass: dn of level j are the prefixes of up of level j, built
  // from the prefixes dn of level j + 1.
  for (genvar j = 0; j <= L; j++) begin : g_dn
    localparam int unsigned NJ = lvl_n(j);
    logic [NJ-1:0][1:0][RAILS-1:0] dn;
    assign dn[0] = g_up[j].up[0];
    if (j < L) begin : g_fill
      localparam int unsigned NH = lvl_n(j + 1);
      for (genvar i = 1; i < NJ; i++) begin : g_out
        if (i % 2 == 1) begin : g_odd
          assign dn[i] = g_dn[j+1].dn[(i-1)/2];
        end else if (NJ % 2 == 1 && i == NJ - 1) begin : g_last
          assign dn[i] = g_dn[j+1].dn[NH-1];
        end else begin : g_even
          mc_diamond #(.RAILS(RAILS)) u_op (
            .s(g_dn[j+1].dn[i/2-1]), .b(g_up[j].up[i]), .y(dn[i])
          );
        end
      end
    end
  end

  assign p = g_dn[0].dn;
endmodule
