// tb_mc_sortnet_full: full-size testbench of mc_sortnet with every parameter
// at its default: the 10-channel depth-optimal network on 16-bit Gray codes,
// single-rail (the circuit as it would be built).
//
// A single-rail circuit carries only stable values, so the inputs are stable
// 16-bit Gray codes; the metastable behaviour of the same netlist is checked
// by tb_mc_sortnet through its dual-rail image. Each vector is checked
// against the input codes sorted by their decoded values (channel 0 =
// smallest). Ties and codes differing only in their last bit are forced by
// drawing values from narrow windows; both are counted and must occur.
module tb_mc_sortnet_full;
  import mc_tb_pkg::*;

  localparam int NVEC = 20000;

  logic [9:0][15:0] x, y;
  int checks = 0, failures = 0, n_equal = 0, n_adjacent = 0;

  mc_sortnet u_dut (.x(x), .y(y));

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned val [10];
    int unsigned base, win;
    for (int vec = 0; vec < NVEC; vec++) begin
      win  = (vec % 2 == 0) ? 65536 : 4;
      base = $urandom_range(65536 - win);
      for (int c = 0; c < 10; c++) begin
        val[c] = base + $urandom_range(win - 1);
        x[c] = gray(16'(val[c]));
      end
      #1;
      for (int i = 0; i < 10; i++)
        for (int j = i + 1; j < 10; j++) begin
          if (val[i] == val[j]) n_equal++;
          if (val[i] + 1 == val[j] || val[j] + 1 == val[i]) n_adjacent++;
        end
      val.sort();
      for (int c = 0; c < 10; c++) begin
        checks++;
        if (y[c] !== gray(16'(val[c]))) begin
          failures++;
          if (failures < 10)
            $display("FAIL channel %0d got %h expected %h", c, y[c], gray(16'(val[c])));
        end
      end
    end
    $display("equal pairs %0d, adjacent-value pairs %0d", n_equal, n_adjacent);
    if (n_equal == 0 || n_adjacent == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
