// mc_sortnet: combinational metastability-containing sorting network.
//
// Sorts N B-bit Gray-code valid strings (see mc_2sort) by placing one
// mc_2sort at every comparator of a fixed sorting network. Because each
// 2-sort outputs valid strings and computes the closure of max and min, the
// network as a whole sorts valid strings correctly with respect to the order
// x < (x between x+1) < x+1, without resolving metastability first.
//
// The network is chosen by NET (see mc_pkg): 4, 7 or 10 channels, the
// 10-channel one either size-optimal (29 comparators, depth 8) or
// depth-optimal (31 comparators, depth 7). The default is the 10-channel
// depth-optimal network with 16-bit inputs (31 x 407 = 12617 gates). The
// comparator layouts are standard ones and not the published source's own
// figures; the comparator counts match the published gate counts. After the
// network, channel 0 holds the minimum and channel N-1 the maximum; this
// direction is this design's choice.
//
// Interface: x[c] is the input of channel c, y[c] the sorted output; every
// bit is RAILS wide. Purely combinational, net_depth(NET) 2-sort delays deep.
module mc_sortnet
  import mc_pkg::*;
#(
  parameter net_e        NET   = NET_SORT10_DEPTH,
  parameter int unsigned B     = 16,
  parameter int unsigned RAILS = 1,
  localparam int unsigned N    = net_channels(NET),
  localparam int unsigned D    = net_depth(NET)
) (
  input  logic [N-1:0][B-1:0][RAILS-1:0] x,
  output logic [N-1:0][B-1:0][RAILS-1:0] y
);
  logic [D:0][N-1:0][B-1:0][RAILS-1:0] stage;

  assign stage[0] = x;
  assign y        = stage[D];

  for (genvar l = 0; l < D; l++) begin : g_layer
    for (genvar ch = 0; ch < N; ch++) begin : g_ch
      localparam int C = net_comp_at(NET, l, ch);
      if (C < 0) begin : g_pass
        assign stage[l+1][ch] = stage[l][ch];
      end else begin : g_comp
        localparam comp_t CMP = net_comp(NET, C);
        // One 2-sort per comparator, placed at its lower channel.
        if (int'(CMP.lo) == ch) begin : g_sort
          mc_2sort #(.B(B), .RAILS(RAILS)) u_sort (
            .g   (stage[l][CMP.lo]),
            .h   (stage[l][CMP.hi]),
            .gmax(stage[l+1][CMP.hi]),
            .hmin(stage[l+1][CMP.lo])
          );
        end
      end
    end
  end
endmodule
