// tb_mc_select: self-checking testbench of mc_select, the selection circuit.
//
// The dual-rail image is driven with all 81 three-valued combinations of
// (a, b, sel1, sel2) and compared with the three-valued evaluation of
// f = b (sel2 + a) + a NOT sel1 using the gate tables. The single-rail cell is
// checked on all 16 binary inputs. Also counts the multiplexer property: with
// sel1 = sel2 = M and a = b stable, f is stable.
module tb_mc_select;
  import mc_tb_pkg::*;

  logic       a1, b1, s11, s21, f1;
  logic [1:0] a2, b2, s12, s22, f2;
  int checks = 0, failures = 0, mux_masked = 0;

  mc_select #(.RAILS(1)) u_dut1 (.a(a1), .b(b1), .sel1(s11), .sel2(s21), .f(f1));
  mc_select #(.RAILS(2)) u_dut2 (.a(a2), .b(b2), .sel1(s12), .sel2(s22), .f(f2));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    trit_e ta, tbb, t1, t2, exp, got;
    bit ok;
    for (int i = 0; i < 16; i++) begin
      {a1, b1, s11, s21} = 4'(i);
      #1;
      checks++;
      if (f1 !== ((b1 & (s21 | a1)) | (a1 & ~s11))) begin
        failures++;
        $display("FAIL binary a=%b b=%b sel1=%b sel2=%b f=%b", a1, b1, s11, s21, f1);
      end
    end
    for (int i = 0; i < 81; i++) begin
      ta  = trit_e'(i % 3);
      tbb = trit_e'((i / 3) % 3);
      t1  = trit_e'((i / 9) % 3);
      t2  = trit_e'((i / 27) % 3);
      a2 = t2r(ta); b2 = t2r(tbb); s12 = t2r(t1); s22 = t2r(t2);
      #1;
      exp = t_or(t_and(tbb, t_or(t2, ta)), t_and(ta, t_not(t1)));
      got = r2t(f2, ok);
      checks++;
      if (!ok || got != exp) begin
        failures++;
        $display("FAIL ternary a=%s b=%s sel1=%s sel2=%s f=%b exp=%s",
                 ta.name(), tbb.name(), t1.name(), t2.name(), f2, exp.name());
      end
      if (t1 == TM && t2 == TM && ta == tbb && ta != TM) begin
        checks++;
        mux_masked++;
        if (got != ta) begin
          failures++;
          $display("FAIL mux with metastable select did not mask: a=b=%s", ta.name());
        end
      end
    end
    if (mux_masked == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
