// mc_2sort_bench: checking harness for one mc_2sort configuration, used by
// tb_mc_2sort.
//
// Drives the B-bit 2-sort with pairs of valid strings, either all pairs
// (EXHAUSTIVE = 1) or NRAND random pairs biased towards equal prefixes and
// metastable ties, and compares gmax / hmin bit by bit with the metastable
// closure of max and min (mc_tb_pkg::closure_2sort). With RAILS = 1 only
// stable inputs are used. Results are reported on its ports when done rises.
module mc_2sort_bench #(
  parameter int unsigned B          = 4,
  parameter int unsigned RAILS      = 2,
  parameter bit          EXHAUSTIVE = 1'b1,
  parameter int unsigned NRAND      = 1000
) (
  output int   checks,
  output int   failures,
  output int   meta_cases,
  output logic done
);
  import mc_tb_pkg::*;

  localparam int unsigned NRANK = (RAILS == 2) ? (2 ** (B + 1) - 1) : (2 ** B);

  logic [B-1:0][RAILS-1:0] g, h, gx, hn;

  mc_2sort #(.B(B), .RAILS(RAILS)) u_dut (.g(g), .h(h), .gmax(gx), .hmin(hn));

  // Rank r of the valid-string order; for RAILS = 1 only stable codes.
  function automatic void pick(int unsigned r, output logic [15:0] v, output logic [15:0] m);
    valid_string((RAILS == 2) ? r : 2 * r, B, v, m);
  endfunction

  task automatic apply_and_check(logic [15:0] gv, logic [15:0] gm,
                                 logic [15:0] hv, logic [15:0] hm);
    logic [15:0] xv, xm, nv, nm;
    logic [15:0] ov, om;
    bit ok;
    for (int i = 0; i < int'(B); i++) begin
      if (RAILS == 2) begin
        g[i] = RAILS'({gv[i] | gm[i], gv[i] & ~gm[i]});
        h[i] = RAILS'({hv[i] | hm[i], hv[i] & ~hm[i]});
      end else begin
        g[i] = RAILS'(gv[i]);
        h[i] = RAILS'(hv[i]);
      end
    end
    #1;
    closure_2sort(gv, gm, hv, hm, B, xv, xm, nv, nm);
    if (gm != 0 || hm != 0) meta_cases++;
    for (int side = 0; side < 2; side++) begin
      ov = '0; om = '0; ok = 1'b1;
      for (int i = 0; i < int'(B); i++) begin
        logic [1:0] r;
        if (RAILS == 2) r = 2'((side == 0) ? gx[i] : hn[i]);
        else r = {2{1'((side == 0) ? gx[i] : hn[i])}};
        ov[i] = r[0];
        om[i] = r[1] & ~r[0];
        if (r == 2'b01) ok = 1'b0;
      end
      checks++;
      if (!ok || ov != ((side == 0) ? xv : nv) || om != ((side == 0) ? xm : nm)) begin
        failures++;
        if (failures < 10)
          $display("FAIL B=%0d g=%h/%h h=%h/%h %s got %h/%h exp %h/%h", B, gv, gm, hv, hm,
                   (side == 0) ? "max" : "min", ov, om,
                   (side == 0) ? xv : nv, (side == 0) ? xm : nm);
      end
    end
  endtask

  initial begin
    logic [15:0] gv, gm, hv, hm;
    checks = 0;
    failures = 0;
    meta_cases = 0;
    done = 1'b0;
    if (EXHAUSTIVE) begin
      for (int unsigned a = 0; a < NRANK; a++) begin
        for (int unsigned b = 0; b < NRANK; b++) begin
          pick(a, gv, gm);
          pick(b, hv, hm);
          apply_and_check(gv, gm, hv, hm);
        end
      end
    end else begin
      for (int unsigned it = 0; it < NRAND; it++) begin
        int unsigned a, b;
        a = $urandom_range(NRANK - 1);
        case ($urandom_range(3))
          0:       b = a;                                       // equal inputs
          1:       b = (a > 2) ? a - 1 - $urandom_range(1) : a + 1; // neighbours
          default: b = $urandom_range(NRANK - 1);
        endcase
        if (b >= NRANK) b = NRANK - 1;
        pick(a, gv, gm);
        pick(b, hv, hm);
        apply_and_check(gv, gm, hv, hm);
      end
    end
    done = 1'b1;
  end
endmodule
