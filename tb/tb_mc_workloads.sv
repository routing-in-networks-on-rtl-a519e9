// tb_mc_workloads: the routing rule of mc_route_calc on every circulant the
// paper evaluates, from MC(2,4) (16 nodes) to MC(7,4) (2401 nodes), and on
// the MC(s,2) family (9 to 100 nodes) of its resource comparison.
// For each, tb_mc_walk checks that every route is a shortest path and that
// the diameter (and, where the paper prints an exact value, the mean
// distance over all N destinations, self included) matches the paper's
// comparison table. The mean distances printed there for MC(2,4) and
// MC(2,6) come from the approximation k/3 and are reported, not checked;
// for MC(6,4) the table gives the interval (5.00, 6.00).
module tb_mc_workloads;
  localparam int NC = 20;
  int  c_checks[NC];
  int  c_fail[NC];
  bit  c_done[NC];

  // Diameters and mean distances (hundredths, +/-1 for rounding) from the
  // paper's Table 1; diameters of the other configurations from a
  // breadth-first search (they are not printed in the paper).
  tb_mc_walk #(.S(2), .K(4), .DIAM(2))                           w0 (c_checks[0], c_fail[0], c_done[0]);
  tb_mc_walk #(.S(2), .K(6), .DIAM(3))                           w1 (c_checks[1], c_fail[1], c_done[1]);
  tb_mc_walk #(.S(3), .K(4), .DIAM(4), .AVG_LO(266), .AVG_HI(268)) w2 (c_checks[2], c_fail[2], c_done[2]);
  tb_mc_walk #(.S(5), .K(4), .DIAM(8), .AVG_LO(479), .AVG_HI(481)) w3 (c_checks[3], c_fail[3], c_done[3]);
  tb_mc_walk #(.S(3), .K(6), .DIAM(6), .AVG_LO(399), .AVG_HI(401)) w4 (c_checks[4], c_fail[4], c_done[4]);
  tb_mc_walk #(.S(6), .K(4), .DIAM(10), .AVG_LO(500), .AVG_HI(600)) w5 (c_checks[5], c_fail[5], c_done[5]);
  tb_mc_walk #(.S(7), .K(4), .DIAM(12), .AVG_LO(685), .AVG_HI(687)) w6 (c_checks[6], c_fail[6], c_done[6]);
  // Table 2 / Figure 3 configurations not in Table 1.
  tb_mc_walk #(.S(2), .K(5), .DIAM(3))                           w7 (c_checks[7], c_fail[7], c_done[7]);
  tb_mc_walk #(.S(5), .K(3), .DIAM(6))                           w8 (c_checks[8], c_fail[8], c_done[8]);
  tb_mc_walk #(.S(3), .K(5), .DIAM(5))                           w9 (c_checks[9], c_fail[9], c_done[9]);
  tb_mc_walk #(.S(6), .K(3), .DIAM(8))                           w10 (c_checks[10], c_fail[10], c_done[10]);
  // The default MC(4,3).
  tb_mc_walk #(.S(4), .K(3), .DIAM(5))                           w11 (c_checks[11], c_fail[11], c_done[11]);
  // Table 3 / Figure 4: MC(s,2), s = 3..10; diameter s - 1.
  tb_mc_walk #(.S(3),  .K(2), .DIAM(2)) w12 (c_checks[12], c_fail[12], c_done[12]);
  tb_mc_walk #(.S(4),  .K(2), .DIAM(3)) w13 (c_checks[13], c_fail[13], c_done[13]);
  tb_mc_walk #(.S(5),  .K(2), .DIAM(4)) w14 (c_checks[14], c_fail[14], c_done[14]);
  tb_mc_walk #(.S(6),  .K(2), .DIAM(5)) w15 (c_checks[15], c_fail[15], c_done[15]);
  tb_mc_walk #(.S(7),  .K(2), .DIAM(6)) w16 (c_checks[16], c_fail[16], c_done[16]);
  tb_mc_walk #(.S(8),  .K(2), .DIAM(7)) w17 (c_checks[17], c_fail[17], c_done[17]);
  tb_mc_walk #(.S(9),  .K(2), .DIAM(8)) w18 (c_checks[18], c_fail[18], c_done[18]);
  tb_mc_walk #(.S(10), .K(2), .DIAM(9)) w19 (c_checks[19], c_fail[19], c_done[19]);

  initial begin : watchdog
    #50ms;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

  initial begin
    int checks, failures;
    bit all;
    do begin
      #100;
      all = 1;
      foreach (c_done[i]) all &= c_done[i];
    end while (!all);
    checks = 0; failures = 0;
    foreach (c_checks[i]) begin
      checks += c_checks[i];
      failures += c_fail[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
