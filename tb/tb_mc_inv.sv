// tb_mc_inv: self-checking testbench of mc_inv, the inverter cell.
//
// Checks the single-rail cell on every binary input and the dual-rail image
// on every three-valued input against the gate tables of the metastability
// model (mc_tb_pkg). A watchdog ends the run if it ever hangs.
module tb_mc_inv;
  import mc_tb_pkg::*;

  logic       a1, b1, y1;
  logic [1:0] a2, b2, y2;
  int checks = 0, failures = 0;

  mc_inv #(.RAILS(1)) u_dut1 (.a(a1), .y(y1));
  mc_inv #(.RAILS(2)) u_dut2 (.a(a2), .y(y2));

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    trit_e ta, tb_, exp, got;
    bit ok;
    logic a, b;
    // Binary behaviour of the real cell.
    for (int i = 0; i < 4; i++) begin
      {a, b} = 2'(i);
      a1 = a;
      b1 = b;
      #1;
      checks++;
      if (y1 !== (~a)) begin
        failures++;
        $display("FAIL binary a=%b b=%b y=%b", a, b, y1);
      end
    end
    // Three-valued behaviour of the dual-rail image.
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) begin
        ta  = trit_e'(i);
        tb_ = trit_e'(j);
        a2 = t2r(ta);
        b2 = t2r(tb_);
        #1;
        exp = t_not(ta);
        got = r2t(y2, ok);
        checks++;
        if (!ok || got != exp) begin
          failures++;
          $display("FAIL ternary a=%s b=%s y=%b expected %s", ta.name(), tb_.name(), y2, exp.name());
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
