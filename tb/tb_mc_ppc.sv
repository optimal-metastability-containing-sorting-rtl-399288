// tb_mc_ppc: self-checking testbench of mc_ppc, the parallel prefix circuit.
//
// Part 1 (binary): single-rail PPC(N) for N = 1..8 and 15, random inputs,
// compared with a sequential left fold of the published transition table.
// Part 2 (metastable): a dual-rail PPC(15) fed with the top 15 bit pairs
// (NOT g_i, h_i) of random 16-bit valid strings; every prefix output must
// equal the metastable closure of the automaton state over all resolutions
// of g and h (mc_tb_pkg::closure_state). This is the property that lets the
// prefix circuit be used on metastable inputs at all.
module tb_mc_ppc;
  import mc_tb_pkg::*;

  localparam int NCFG = 9;
  localparam int NRAND = 3000;

  logic [14:0][1:0]              rnd;
  logic [NCFG-1:0][14:0][1:0]    pout;
  logic [14:0][1:0][1:0]         d2, p2;
  int checks = 0, failures = 0, meta_prefixes = 0;

  function automatic int cfg_n(int i);
    return (i < 8) ? i + 1 : 15;
  endfunction

  for (genvar gi = 0; gi < NCFG; gi++) begin : g_cfg
    localparam int NN = cfg_n(gi);
    logic [NN-1:0][1:0] d, p;
    assign d = rnd[NN-1:0];
    mc_ppc #(.N(NN), .RAILS(1)) u_dut (.d(d), .p(p));
    if (NN < 15) begin : g_pad
      assign pout[gi] = {{(15-NN){2'b00}}, p};
    end else begin : g_full
      assign pout[gi] = p;
    end
  end

  mc_ppc #(.N(15), .RAILS(2)) u_dut2 (.d(d2), .p(p2));

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] acc, expn;
    logic [15:0] gv, gm, hv, hm;
    logic [1:0] sv, sm;
    logic [15:0][1:0] gr, hr;
    bit ok;
    trit_e t1, t2;
    // Part 1.
    for (int it = 0; it < NRAND; it++) begin
      for (int i = 0; i < 15; i++) rnd[i] = 2'($urandom);
      #1;
      for (int c = 0; c < NCFG; c++) begin
        acc = {~rnd[0][1], rnd[0][0]};
        for (int i = 0; i < cfg_n(c); i++) begin
          if (i > 0) acc = diamond(acc, {~rnd[i][1], rnd[i][0]});
          expn = {~acc[1], acc[0]};
          checks++;
          if (pout[c][i] !== expn) begin
            failures++;
            if (failures < 10)
              $display("FAIL N=%0d p[%0d]=%b exp %b", cfg_n(c), i, pout[c][i], expn);
          end
        end
      end
    end
    // Part 2.
    for (int it = 0; it < NRAND; it++) begin
      valid_string($urandom_range(65536 * 2 - 2), 16, gv, gm);
      // Bias h towards g so that long equal prefixes and metastable ties occur.
      if ($urandom_range(3) == 0) begin
        hv = gv; hm = gm;
      end else if ($urandom_range(2) == 0) begin
        valid_string($urandom_range(65536 * 2 - 2), 16, hv, hm);
      end else begin
        valid_string($urandom_range(511), 16, hv, hm);
        hv = (gv & 16'hFF00) | (hv & 16'h00FF);
        hm = ((gm & 16'hFF00) == 0) ? (hm & 16'h00FF) : 16'h0;
      end
      gr = to_rails(gv, gm);
      hr = to_rails(hv, hm);
      for (int k = 0; k < 15; k++) begin
        d2[k][1] = {~gr[15-k][0], ~gr[15-k][1]};  // inverted g bit
        d2[k][0] = hr[15-k];
      end
      #1;
      for (int k = 0; k < 15; k++) begin
        closure_state(gv, gm, hv, hm, 16, k + 1, sv, sm);
        // N form: first bit inverted.
        t1 = sm[1] ? TM : (sv[1] ? T0 : T1);
        t2 = sm[0] ? TM : (sv[0] ? T1 : T0);
        if (sm != 0) meta_prefixes++;
        checks++;
        if (r2t(p2[k][1], ok) != t1 || !ok || r2t(p2[k][0], ok) != t2 || !ok) begin
          failures++;
          if (failures < 10)
            $display("FAIL metastable prefix %0d: g=%h/%h h=%h/%h got %b exp %s%s",
                     k, gv, gm, hv, hm, p2[k], t1.name(), t2.name());
        end
      end
    end
    if (meta_prefixes == 0) begin
      failures++;
      $display("FAIL no metastable prefix state was exercised");
    end
    $display("metastable prefix states checked: %0d", meta_prefixes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
