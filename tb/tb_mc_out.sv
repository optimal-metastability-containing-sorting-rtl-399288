// tb_mc_out: self-checking testbench of mc_out, the output operator.
//
// Reference: the published output table (mc_tb_pkg::outop), giving {max bit,
// min bit} from the state and {g, h}. The state enters in N form (first bit
// inverted). The single-rail operator is checked on all 16 binary inputs;
// the dual-rail image on all 81 three-valued inputs against the metastable
// closure of the table.
module tb_mc_out;
  import mc_tb_pkg::*;

  logic [1:0]      s1, b1, y1;
  logic [1:0][1:0] s2, b2, y2;
  int checks = 0, failures = 0, masked = 0;

  mc_out #(.RAILS(1)) u_dut1 (.ns(s1), .g(b1[1]), .h(b1[0]), .gmax(y1[1]), .hmin(y1[0]));
  mc_out #(.RAILS(2)) u_dut2 (.ns(s2), .g(b2[1]), .h(b2[0]), .gmax(y2[1]), .hmin(y2[0]));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference on binary operands (N-form state, result as delivered).
  function automatic logic [1:0] ref_bin(logic [1:0] sv, logic [1:0] bv);
    logic [1:0] r;
    r = outop({~sv[1], sv[0]}, bv);
    return r;
  endfunction

  initial begin
    trit_e t [4];
    trit_e exp [2];
    trit_e got [2];
    logic [1:0] sv, bv, r, r0;
    bit ok, first, any_m;
    for (int i = 0; i < 16; i++) begin
      {s1, b1} = 4'(i);
      #1;
      checks++;
      if (y1 !== ref_bin(s1, b1)) begin
        failures++;
        $display("FAIL binary s=%b b=%b y=%b exp=%b", s1, b1, y1, ref_bin(s1, b1));
      end
    end
    for (int i = 0; i < 81; i++) begin
      for (int k = 0; k < 4; k++) t[k] = trit_e'((i / (3 ** k)) % 3);
      s2[1] = t2r(t[0]); s2[0] = t2r(t[1]); b2[1] = t2r(t[2]); b2[0] = t2r(t[3]);
      #1;
      // Closure: superpose the binary results over all resolutions.
      first = 1'b1;
      r0 = '0;
      exp[0] = T0; exp[1] = T0;
      any_m = 1'b0;
      for (int rr = 0; rr < 16; rr++) begin
        logic [3:0] q;
        bit fits;
        q = 4'(rr);
        fits = 1'b1;
        for (int k = 0; k < 4; k++) begin
          if (t[k] == TM) any_m = 1'b1;
          if (t[k] != TM && q[3-k] != (t[k] == T1)) fits = 1'b0;
        end
        if (fits) begin
          sv = q[3:2];
          bv = q[1:0];
          r = ref_bin(sv, bv);
          if (first) begin
            exp[1] = r[1] ? T1 : T0;
            exp[0] = r[0] ? T1 : T0;
            first = 1'b0;
          end else begin
            exp[1] = t_star(exp[1], r[1] ? T1 : T0);
            exp[0] = t_star(exp[0], r[0] ? T1 : T0);
          end
        end
      end
      for (int k = 0; k < 2; k++) begin
        got[k] = r2t(y2[k], ok);
        checks++;
        if (!ok || got[k] != exp[k]) begin
          failures++;
          $display("FAIL ternary in=%s%s,%s%s bit %0d got %b exp %s", t[0].name(), t[1].name(),
                   t[2].name(), t[3].name(), k, y2[k], exp[k].name());
        end
        if (any_m && got[k] != TM) masked++;
      end
    end
    if (masked == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
