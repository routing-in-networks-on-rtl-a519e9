// tb_mc_route_calc: exhaustive self-checking test of the next-hop unit.
//
// Two instances are tested over every (cur, dst) pair: the default MC(4,3)
// (64 nodes) and MC(2,4) (16 nodes, where the two links at N/2 merge).
// For each pair the chosen port must
//  - equal the port of the nearest-generatrix rule (reference model),
//  - lead to a neighbour one hop closer to dst by breadth-first-search
//    distance (so every step lies on a shortest path),
// and the arrived / go_left / overshoot flags must match the reference.
// The worked example of the paper's Figure 2, 5 -> 21 -> 17 in MC(4,3) via
// +16 then -4, is checked separately. The unit is combinational, so each
// pair is applied and sampled after a 1 ns settling delay.
module tb_mc_route_calc;
  import tb_mc_ref_pkg::*;

  int checks = 0;
  int failures = 0;

  // ---------------- MC(4,3), the default ----------------
  localparam int S1 = 4, K1 = 3, N1 = 64;
  logic [5:0] cur1, dst1;
  logic [2:0] port1;
  logic       arr1, left1, over1;
  logic [1:0] gi1;
  mc_route_calc u_dut (
    .cur(cur1), .dst(dst1), .port(port1), .arrived(arr1),
    .go_left(left1), .gen_idx(gi1), .overshoot(over1)
  );

  // ---------------- MC(2,4) ----------------
  localparam int S2 = 2, K2 = 4, N2 = 16;
  logic [3:0] cur2, dst2;
  logic [3:0] port2;
  logic       arr2, left2, over2;
  logic [1:0] gi2;
  mc_route_calc #(.S(S2), .K(K2)) u_dut2 (
    .cur(cur2), .dst(dst2), .port(port2), .arrived(arr2),
    .go_left(left2), .gen_idx(gi2), .overshoot(over2)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Node reached from `cur` through port p (reference numbering).
  function automatic int via_port(int s, int k, int cur, int p);
    int n = tb_pow(s, k);
    if (p == 0) return cur;
    if (p <= k) return (cur - tb_pow(s, k - p) + n) % n;
    if (s == 2 && p == 2 * k) return (cur + n / 2) % n;
    return (cur + tb_pow(s, p - k - 1)) % n;
  endfunction

  task automatic check_pair(int s, int k, int c, int d, int port, bit arr, bit lft, bit ovr,
                            ref int dist0[]);
    int n = tb_pow(s, k);
    int st = tb_step(s, k, c, d);
    int rel = ((d - c) % n + n) % n;
    int rem = (2 * rel <= n) ? rel : n - rel;
    int nb;
    check(port == tb_port_of_step(s, k, st),
          $sformatf("MC(%0d,%0d) %0d->%0d port %0d, expected %0d", s, k, c, d, port,
                    tb_port_of_step(s, k, st)));
    check(arr == (c == d), $sformatf("MC(%0d,%0d) %0d->%0d arrived flag", s, k, c, d));
    check(lft == (st < 0), $sformatf("MC(%0d,%0d) %0d->%0d direction flag", s, k, c, d));
    check(ovr == ((st < 0 ? -st : st) > rem),
          $sformatf("MC(%0d,%0d) %0d->%0d overshoot flag", s, k, c, d));
    if (c != d) begin
      nb = via_port(s, k, c, port);
      check(dist0[((d - nb) % n + n) % n] == dist0[rel] - 1,
            $sformatf("MC(%0d,%0d) %0d->%0d step to %0d is not on a shortest path", s, k, c, d, nb));
    end
  endtask

  initial begin : watchdog
    #10ms;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int dist_a[];
    int dist_b[];
    int overshoots = 0;
    tb_bfs_dist(S1, K1, dist_a);
    tb_bfs_dist(S2, K2, dist_b);

    // Figure 2: 5 -> 21 (+16, port 6), 21 -> 17 (-4, port 2).
    cur1 = 6'd5;  dst1 = 6'd17; #1;
    check(port1 == 3'd6 && !left1 && over1, "Figure 2 first step 5 -> 21 should be +16");
    cur1 = 6'd21; dst1 = 6'd17; #1;
    check(port1 == 3'd2 && left1 && !over1, "Figure 2 second step 21 -> 17 should be -4");

    for (int c = 0; c < N1; c++)
      for (int d = 0; d < N1; d++) begin
        cur1 = 6'(c); dst1 = 6'(d); #1;
        check_pair(S1, K1, c, d, int'(port1), arr1, left1, over1, dist_a);
        overshoots += int'(over1);
      end
    for (int c = 0; c < N2; c++)
      for (int d = 0; d < N2; d++) begin
        cur2 = 4'(c); dst2 = 4'(d); #1;
        check_pair(S2, K2, c, d, int'(port2), arr2, left2, over2, dist_b);
        check(int'(port2) != 1, "MC(2,4) used the nonexistent left port at N/2");
      end
    check(overshoots > 0, "no overstepping step was exercised");
    $display("MC(4,3) pairs routed by overstepping: %0d", overshoots);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
