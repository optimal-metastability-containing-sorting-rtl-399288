// tb_mc_2sort: self-checking testbench of mc_2sort.
//
// Exhaustive over all pairs of valid strings (including metastable ones) for
// B = 1, 2, 3, 4, 5 and 8, and 200000 random pairs at B = 16, in the
// dual-rail image; 100000 random stable pairs at B = 16 on the single-rail
// circuit. Each output bit is compared with the metastable closure of
// max / min over all resolutions of the inputs.
module tb_mc_2sort;
  localparam int NB = 8;
  int   c [NB];
  int   f [NB];
  int   m [NB];
  logic d [NB];

  mc_2sort_bench #(.B(1),  .RAILS(2), .EXHAUSTIVE(1)) u_b1  (.checks(c[0]), .failures(f[0]), .meta_cases(m[0]), .done(d[0]));
  mc_2sort_bench #(.B(2),  .RAILS(2), .EXHAUSTIVE(1)) u_b2  (.checks(c[1]), .failures(f[1]), .meta_cases(m[1]), .done(d[1]));
  mc_2sort_bench #(.B(3),  .RAILS(2), .EXHAUSTIVE(1)) u_b3  (.checks(c[2]), .failures(f[2]), .meta_cases(m[2]), .done(d[2]));
  mc_2sort_bench #(.B(4),  .RAILS(2), .EXHAUSTIVE(1)) u_b4  (.checks(c[3]), .failures(f[3]), .meta_cases(m[3]), .done(d[3]));
  mc_2sort_bench #(.B(5),  .RAILS(2), .EXHAUSTIVE(1)) u_b5  (.checks(c[4]), .failures(f[4]), .meta_cases(m[4]), .done(d[4]));
  mc_2sort_bench #(.B(8),  .RAILS(2), .EXHAUSTIVE(1)) u_b8  (.checks(c[5]), .failures(f[5]), .meta_cases(m[5]), .done(d[5]));
  mc_2sort_bench #(.B(16), .RAILS(2), .EXHAUSTIVE(0), .NRAND(200000)) u_b16m (.checks(c[6]), .failures(f[6]), .meta_cases(m[6]), .done(d[6]));
  mc_2sort_bench #(.B(16), .RAILS(1), .EXHAUSTIVE(0), .NRAND(100000)) u_b16s (.checks(c[7]), .failures(f[7]), .meta_cases(m[7]), .done(d[7]));

  initial begin : watchdog
    #100000000;
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

  initial begin
    int checks, failures;
    bit all_done;
    do begin
      #10;
      all_done = 1'b1;
      foreach (d[i]) if (d[i] !== 1'b1) all_done = 1'b0;
    end while (!all_done);
    checks = 0;
    failures = 0;
    foreach (c[i]) begin
      checks += c[i];
      failures += f[i];
    end
    // Every dual-rail configuration must have seen metastable inputs.
    for (int i = 0; i < 7; i++) if (m[i] == 0) failures++;
    $display("metastable input pairs: B=8 %0d, B=16 %0d", m[5], m[6]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
