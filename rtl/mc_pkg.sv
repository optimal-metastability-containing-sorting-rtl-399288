// mc_pkg: types and constants shared by the metastability-containing (MC)
// sorting circuits.
//
// Two things live here.
//
// 1. Rail encoding. Every wire of the MC netlist is a vector of RAILS bits.
//    RAILS = 1 is the real circuit: one bit per wire. RAILS = 2 is a
//    dual-rail image of the same gate netlist that evaluates it in the
//    three-valued gate model {0, 1, M}, where M is a metastable signal: rail
//    [1] is "may be 1" and rail [0] is "must be 1", so 0 = 2'b00, 1 = 2'b11 and
//    M = 2'b10 (2'b01 never occurs). In this encoding AND and OR act bitwise on
//    both rails and an inverter inverts and swaps the rails, which reproduces
//    exactly the behaviour of AND, OR and NOT gates on metastable inputs (an
//    AND with a stable 0 input, or an OR with a stable 1 input, masks M).
//    RAILS = 2 is meant for verification; it is still synthesizable.
//
// 2. Sorting networks. The comparator layouts of the four networks for which
//    results are usually quoted: 4 channels (5 comparators, depth 3), 7
//    channels (16, depth 6), 10 channels optimal in size (29, depth 8) and
//    10 channels optimal in depth (31, depth 7). The layouts are standard ones,
//    checked to sort with the 0-1 principle; they are not taken from any
//    particular figure. Each comparator is {layer, lo, hi}: after it, channel
//    lo holds the minimum and channel hi the maximum.
package mc_pkg;

  typedef enum int unsigned {
    NET_SORT4        = 0,  // 4 channels, 5 comparators, depth 3
    NET_SORT7        = 1,  // 7 channels, 16 comparators, depth 6
    NET_SORT10_SIZE  = 2,  // 10 channels, 29 comparators (size optimal), depth 8
    NET_SORT10_DEPTH = 3   // 10 channels, 31 comparators, depth 7 (depth optimal)
  } net_e;

  typedef struct packed {
    logic [7:0] layer;
    logic [7:0] lo;
    logic [7:0] hi;
  } comp_t;

  localparam comp_t SORT4 [5] = '{
    '{8'd0, 8'd0, 8'd1}, '{8'd0, 8'd2, 8'd3},
    '{8'd1, 8'd0, 8'd2}, '{8'd1, 8'd1, 8'd3},
    '{8'd2, 8'd1, 8'd2}
  };

  localparam comp_t SORT7 [16] = '{
    '{8'd0, 8'd0, 8'd6}, '{8'd0, 8'd2, 8'd3}, '{8'd0, 8'd4, 8'd5},
    '{8'd1, 8'd0, 8'd2}, '{8'd1, 8'd1, 8'd4}, '{8'd1, 8'd3, 8'd6},
    '{8'd2, 8'd0, 8'd1}, '{8'd2, 8'd2, 8'd5}, '{8'd2, 8'd3, 8'd4},
    '{8'd3, 8'd1, 8'd2}, '{8'd3, 8'd4, 8'd6},
    '{8'd4, 8'd2, 8'd3}, '{8'd4, 8'd4, 8'd5},
    '{8'd5, 8'd1, 8'd2}, '{8'd5, 8'd3, 8'd4}, '{8'd5, 8'd5, 8'd6}
  };

  localparam comp_t SORT10_SIZE [29] = '{
    '{8'd0, 8'd0, 8'd8}, '{8'd0, 8'd1, 8'd9}, '{8'd0, 8'd2, 8'd7}, '{8'd0, 8'd3, 8'd5}, '{8'd0, 8'd4, 8'd6},
    '{8'd1, 8'd0, 8'd2}, '{8'd1, 8'd1, 8'd4}, '{8'd1, 8'd5, 8'd8}, '{8'd1, 8'd7, 8'd9},
    '{8'd2, 8'd0, 8'd3}, '{8'd2, 8'd2, 8'd4}, '{8'd2, 8'd5, 8'd7}, '{8'd2, 8'd6, 8'd9},
    '{8'd3, 8'd0, 8'd1}, '{8'd3, 8'd3, 8'd6}, '{8'd3, 8'd8, 8'd9},
    '{8'd4, 8'd1, 8'd5}, '{8'd4, 8'd2, 8'd3}, '{8'd4, 8'd4, 8'd8}, '{8'd4, 8'd6, 8'd7},
    '{8'd5, 8'd1, 8'd2}, '{8'd5, 8'd3, 8'd5}, '{8'd5, 8'd4, 8'd6}, '{8'd5, 8'd7, 8'd8},
    '{8'd6, 8'd2, 8'd3}, '{8'd6, 8'd4, 8'd5}, '{8'd6, 8'd6, 8'd7},
    '{8'd7, 8'd3, 8'd4}, '{8'd7, 8'd5, 8'd6}
  };

  localparam comp_t SORT10_DEPTH [31] = '{
    '{8'd0, 8'd0, 8'd1}, '{8'd0, 8'd2, 8'd5}, '{8'd0, 8'd3, 8'd6}, '{8'd0, 8'd4, 8'd7}, '{8'd0, 8'd8, 8'd9},
    '{8'd1, 8'd0, 8'd6}, '{8'd1, 8'd1, 8'd8}, '{8'd1, 8'd2, 8'd4}, '{8'd1, 8'd3, 8'd9}, '{8'd1, 8'd5, 8'd7},
    '{8'd2, 8'd0, 8'd2}, '{8'd2, 8'd1, 8'd3}, '{8'd2, 8'd4, 8'd5}, '{8'd2, 8'd6, 8'd8}, '{8'd2, 8'd7, 8'd9},
    '{8'd3, 8'd0, 8'd1}, '{8'd3, 8'd2, 8'd7}, '{8'd3, 8'd3, 8'd5}, '{8'd3, 8'd4, 8'd6}, '{8'd3, 8'd8, 8'd9},
    '{8'd4, 8'd1, 8'd2}, '{8'd4, 8'd3, 8'd4}, '{8'd4, 8'd5, 8'd6}, '{8'd4, 8'd7, 8'd8},
    '{8'd5, 8'd1, 8'd3}, '{8'd5, 8'd2, 8'd4}, '{8'd5, 8'd5, 8'd7}, '{8'd5, 8'd6, 8'd8},
    '{8'd6, 8'd2, 8'd3}, '{8'd6, 8'd4, 8'd5}, '{8'd6, 8'd6, 8'd7}
  };

  function automatic int unsigned net_channels(net_e net);
    case (net)
      NET_SORT4:       return 4;
      NET_SORT7:       return 7;
      default:         return 10;
    endcase
  endfunction

  function automatic int unsigned net_size(net_e net);
    case (net)
      NET_SORT4:       return 5;
      NET_SORT7:       return 16;
      NET_SORT10_SIZE: return 29;
      default:         return 31;
    endcase
  endfunction

  function automatic int unsigned net_depth(net_e net);
    case (net)
      NET_SORT4:       return 3;
      NET_SORT7:       return 6;
      NET_SORT10_SIZE: return 8;
      default:         return 7;
    endcase
  endfunction

  // Comparator k (0 <= k < net_size(net)) of a network, layers in order.
  function automatic comp_t net_comp(net_e net, int unsigned k);
    if (k >= net_size(net)) return '0;
    case (net)
      NET_SORT4:       return SORT4[k];
      NET_SORT7:       return SORT7[k];
      NET_SORT10_SIZE: return SORT10_SIZE[k];
      default:         return SORT10_DEPTH[k];
    endcase
  endfunction

  // Index of the comparator that touches channel ch in layer l, or -1 if the
  // channel passes that layer untouched.
  function automatic int net_comp_at(net_e net, int unsigned l, int unsigned ch);
    comp_t c;
    for (int unsigned k = 0; k < net_size(net); k++) begin
      c = net_comp(net, k);
      if (int'(c.layer) == int'(l) && (int'(c.lo) == int'(ch) || int'(c.hi) == int'(ch)))
        return int'(k);
    end
    return -1;
  endfunction

  // Gate count of a B-bit 2-sort built as in mc_2sort: B-1 inverters for the
  // complemented g inputs, one AND and one OR for the most significant bit,
  // 10 gates for every other out cell and for every diamond cell of the
  // prefix circuit on B-1 elements.
  function automatic int unsigned ppc_ops(int unsigned n);
    if (n <= 1) return 0;
    return n / 2 + ppc_ops((n + 1) / 2) + ((n % 2 == 1) ? (n - 3) / 2 : (n - 2) / 2);
  endfunction

  function automatic int unsigned two_sort_gates(int unsigned b);
    if (b == 1) return 2;
    return (b - 1) + 2 + 10 * (b - 1) + 10 * ppc_ops(b - 1);
  endfunction

endpackage
