// tb_mc_sortnet: end-to-end testbench of the MC sorting networks.
//
// Instances: u_d10, u_s10, u_s7, u_s4 - the four networks (10 depth-optimal, 10
//            size-optimal, 7, 4 channels) at 16 bits as dual-rail images,
//            driven with valid strings that may be metastable.
// Every vector draws one rank per channel in the order of valid strings
// (rank 2x = code of x, rank 2x+1 = the metastable string between x and
// x+1); the expected output of channel c is the string whose rank is the
// c-th smallest. Ranks are often drawn from a narrow window so that equal
// inputs, equal metastable inputs and neighbouring ranks occur; each of these
// situations, and metastable outputs, is counted and must occur. The
// published gate counts of the four networks are also compared with the
// count of this construction (comparators x gates per 2-sort).
module tb_mc_sortnet;
  import mc_pkg::*;
  import mc_tb_pkg::*;

  localparam int unsigned B      = 16;
  localparam int          NVEC   = 20000;
  localparam int unsigned NRANKS = 2 ** (B + 1) - 1;

  logic [9:0][B-1:0][1:0] x_d10, y_d10, x_s10, y_s10;
  logic [6:0][B-1:0][1:0] x_s7, y_s7;
  logic [3:0][B-1:0][1:0] x_s4, y_s4;

  mc_sortnet #(.NET(NET_SORT10_DEPTH), .B(B), .RAILS(2)) u_d10 (.x(x_d10), .y(y_d10));
  mc_sortnet #(.NET(NET_SORT10_SIZE),  .B(B), .RAILS(2)) u_s10 (.x(x_s10), .y(y_s10));
  mc_sortnet #(.NET(NET_SORT7),        .B(B), .RAILS(2)) u_s7  (.x(x_s7),  .y(y_s7));
  mc_sortnet #(.NET(NET_SORT4),        .B(B), .RAILS(2)) u_s4  (.x(x_s4),  .y(y_s4));

  int checks = 0, failures = 0;
  int n_meta_in = 0, n_equal = 0, n_equal_meta = 0, n_neighbour = 0, n_meta_out = 0;

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_channel(string name, int c, logic [B-1:0][1:0] got, int unsigned rank);
    logic [15:0] ev, em, gv, gm;
    bit ok;
    valid_string(rank, B, ev, em);
    from_rails(got, gv, gm, ok);
    checks++;
    if (!ok || gv != ev || gm != em) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s channel %0d got %h/%h expected %h/%h (rank %0d)", name, c, gv, gm, ev, em, rank);
    end
    if (gm != 0) n_meta_out++;
  endtask

  // Sort the first n ranks of r ascending (reference).
  function automatic void sort_ranks(int unsigned r[10], int n, output int unsigned s[10]);
    s = r;
    for (int i = 0; i < n; i++)
      for (int j = 0; j + 1 < n - i; j++)
        if (s[j] > s[j+1]) begin
          int unsigned t;
          t = s[j]; s[j] = s[j+1]; s[j+1] = t;
        end
  endfunction

  task automatic gate_count_check(net_e net, int unsigned bits, int unsigned published);
    checks++;
    if (net_size(net) * two_sort_gates(bits) != published) begin
      failures++;
      $display("FAIL gate count %s B=%0d: %0d, published %0d", net.name(), bits,
               net_size(net) * two_sort_gates(bits), published);
    end
  endtask

  initial begin
    int unsigned r [10];
    int unsigned rs [10];
    int unsigned base, win;
    logic [15:0] v, m;

    // Published gate counts of the MC sorting networks, B = 2, 4, 8, 16.
    gate_count_check(NET_SORT4, 2, 65);        gate_count_check(NET_SORT4, 4, 275);
    gate_count_check(NET_SORT4, 8, 845);       gate_count_check(NET_SORT4, 16, 2035);
    gate_count_check(NET_SORT7, 2, 208);       gate_count_check(NET_SORT7, 4, 880);
    gate_count_check(NET_SORT7, 8, 2704);      gate_count_check(NET_SORT7, 16, 6512);
    gate_count_check(NET_SORT10_SIZE, 2, 377); gate_count_check(NET_SORT10_SIZE, 4, 1595);
    gate_count_check(NET_SORT10_SIZE, 8, 4901); gate_count_check(NET_SORT10_SIZE, 16, 11803);
    gate_count_check(NET_SORT10_DEPTH, 2, 403); gate_count_check(NET_SORT10_DEPTH, 4, 1705);
    gate_count_check(NET_SORT10_DEPTH, 8, 5239); gate_count_check(NET_SORT10_DEPTH, 16, 12617);

    for (int vec = 0; vec < NVEC; vec++) begin
      // Ranks: full range, or a narrow window to force ties and neighbours.
      win  = (vec % 3 == 0) ? NRANKS : ((vec % 3 == 1) ? 6 : 40);
      base = $urandom_range(NRANKS - win);
      for (int c = 0; c < 10; c++) r[c] = base + $urandom_range(win - 1);

      // Dual-rail networks get the ranks as they are.
      for (int c = 0; c < 10; c++) begin
        valid_string(r[c], B, v, m);
        x_d10[c] = to_rails(v, m);
        x_s10[c] = to_rails(v, m);
        if (c < 7) x_s7[c] = to_rails(v, m);
        if (c < 4) x_s4[c] = to_rails(v, m);
      end
      #1;

      // Situation counters (over the 10-channel inputs).
      for (int i = 0; i < 10; i++) begin
        if (r[i] % 2 == 1) n_meta_in++;
        for (int j = i + 1; j < 10; j++) begin
          if (r[i] == r[j]) n_equal++;
          if (r[i] == r[j] && r[i] % 2 == 1) n_equal_meta++;
          if (r[i] + 1 == r[j] || r[j] + 1 == r[i]) n_neighbour++;
        end
      end

      sort_ranks(r, 10, rs);
      for (int c = 0; c < 10; c++) check_channel("10-depth", c, y_d10[c], rs[c]);
      for (int c = 0; c < 10; c++) check_channel("10-size", c, y_s10[c], rs[c]);
      sort_ranks(r, 7, rs);
      for (int c = 0; c < 7; c++) check_channel("7", c, y_s7[c], rs[c]);
      sort_ranks(r, 4, rs);
      for (int c = 0; c < 4; c++) check_channel("4", c, y_s4[c], rs[c]);
    end

    $display("metastable inputs %0d, equal pairs %0d, equal metastable pairs %0d, neighbour pairs %0d, metastable outputs %0d",
             n_meta_in, n_equal, n_equal_meta, n_neighbour, n_meta_out);
    if (n_meta_in == 0 || n_equal == 0 || n_equal_meta == 0 || n_neighbour == 0 || n_meta_out == 0) begin
      failures++;
      $display("FAIL a situation was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
