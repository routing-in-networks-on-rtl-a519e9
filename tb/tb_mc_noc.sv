// tb_mc_noc: end-to-end test of the whole network at its default size,
// MC(4,3) with 64 routers, with no parameter changed.
//
// Phase A, shift traffic: for every offset d = 0..N-1 each node i sends one
// packet to node (i + d) mod N, all at once. Every packet then takes the
// same sequence of ports at the same time, so none waits for another, and
// each must be taken from its destination's ejection port exactly
// hops + 1 clock edges after its injection edge, hops being the
// breadth-first-search distance (the shortest path).
// Phase B, random traffic: every node sends packets to random destinations
// (itself included) with random gaps while the ejection ports apply random
// back-pressure. Every packet must arrive once, at its destination,
// unchanged; none may arrive faster than its shortest path allows.
// Throughout, the link transfers seen inside the network must add up to
// the hop counts of the reference routing rule, and the test counts that
// each mechanism happened: left and right steps, overstepping steps,
// delivery to the sending node itself, packets delayed by contention,
// injection stalls and ejection back-pressure.
module tb_mc_noc;
  import tb_mc_ref_pkg::*;
  import mc_pkg::*;

  localparam int S = MC_S_DEFAULT, K = MC_K_DEFAULT;
  localparam int N = S ** K;
  localparam int NP = 2 * K + 1;
  localparam int AW = mc_addr_w(S, K);
  localparam int DW = MC_DATA_W_DEFAULT;
  localparam int PW = AW + DW;
  localparam int NPKT = 40;          // packets per node in phase B

  logic clk = 0, rst_n = 0;
  logic [N-1:0]         inj_valid, inj_ready, ej_valid, ej_ready;
  logic [N-1:0][PW-1:0] inj_pkt, ej_pkt;

  mc_noc dut (.clk, .rst_n, .inj_valid, .inj_ready, .inj_pkt, .ej_valid, .ej_ready, .ej_pkt);

  always #5 clk = ~clk;

  // Per-node drivers (kept apart so that each source process owns its own).
  logic          drv_valid[N];
  logic [PW-1:0] drv_pkt[N];
  logic          drv_ready[N];
  for (genvar i = 0; i < N; i++) begin : g_drv
    assign inj_valid[i] = drv_valid[i];
    assign inj_pkt[i]   = drv_pkt[i];
    assign ej_ready[i]  = drv_ready[i];
  end

  int checks = 0, failures = 0, cycle = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  int dist0[];
  // Outstanding packets, keyed by their data word {src, seq}.
  int out_dst[int unsigned];
  int out_cycle[int unsigned];
  int sent = 0, received = 0, phase = 0;
  int ref_hops = 0, link_hops = 0, left_hops = 0, right_hops = 0;
  int overshoot_steps = 0, self_sends = 0, delayed = 0, inj_stall = 0, ej_stall = 0;
  int max_hops = 0;

  // Reference hop count and the overstepping steps on the way.
  function automatic int count_overshoots(int a, int b);
    int c = a, n = 0;
    while (c != b) begin
      int rel = ((b - c) % N + N) % N;
      int rem = (2 * rel <= N) ? rel : N - rel;
      int st = tb_step(S, K, c, b);
      if ((st < 0 ? -st : st) > rem) n++;
      c = ((c + st) % N + N) % N;
    end
    return n;
  endfunction

  // Injected packet: remember where it goes and when it entered.
  task automatic note_injection(int i);
    int unsigned key = int'(inj_pkt[i][DW-1:0]);
    check(!out_dst.exists(key), "data word reused while in flight");
    out_dst[key]   = int'(inj_pkt[i][PW-1 -: AW]);
    out_cycle[key] = cycle;
    sent++;
  endtask

  // Ejected packet at node i: check it and count what happened to it.
  task automatic note_ejection(int i);
    int unsigned key = int'(ej_pkt[i][DW-1:0]);
    int src, hops, lat;
    received++;
    if (!out_dst.exists(key)) begin
      check(0, $sformatf("node %0d got unknown packet %h", i, ej_pkt[i]));
      return;
    end
    src  = int'(key >> 20);
    hops = dist0[((i - src) % N + N) % N];
    lat  = cycle - out_cycle[key];
    check(out_dst[key] == i, $sformatf("packet for %0d delivered at %0d", out_dst[key], i));
    check(int'(ej_pkt[i][PW-1 -: AW]) == i, "address field changed in flight");
    check(tb_route_hops(S, K, src, i) == hops, "reference route is not a shortest path");
    if (phase == 0)
      check(lat == hops + 1, $sformatf("%0d->%0d took %0d cycles, expected %0d",
                                       src, i, lat, hops + 1));
    else
      check(lat >= hops + 1, $sformatf("%0d->%0d faster than its path", src, i));
    if (lat > hops + 1) delayed++;
    if (src == i) self_sends++;
    if (hops > max_hops) max_hops = hops;
    ref_hops += hops;
    overshoot_steps += count_overshoots(src, i);
    out_dst.delete(key);
    out_cycle.delete(key);
  endtask

  // Scoreboard. The per-node scan only collects events; the checks run
  // once per event.
  int inj_q[$], ej_q[$];
  always @(posedge clk) if (rst_n) begin
    cycle++;
    for (int i = 0; i < N; i++) begin
      if (inj_valid[i] && inj_ready[i]) inj_q.push_back(i);
      if (ej_valid[i] && ej_ready[i]) ej_q.push_back(i);
      if (inj_valid[i] && !inj_ready[i]) inj_stall++;
      if (ej_valid[i] && !ej_ready[i]) ej_stall++;
    end
    while (inj_q.size() > 0) note_injection(inj_q.pop_front());
    while (ej_q.size() > 0) note_ejection(ej_q.pop_front());
  end

  // Link transfers inside the network, seen at every router's network ports.
  for (genvar m = 0; m < N; m++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      for (int p = 1; p < NP; p++)
        if (dut.g_node[m].u_router.out_valid[p] && dut.g_node[m].u_router.out_ready[p]) begin
          link_hops++;
          if (p <= K) left_hops++;
          else        right_hops++;
        end
    end
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired (sent %0d, received %0d)", sent, received);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seq[N];
  task automatic offer(int i, int dst);
    @(negedge clk);
    drv_pkt[i]   = {AW'(dst), 12'(i), 20'(seq[i])};
    drv_valid[i] = 1'b1;
    seq[i]++;
    while (!inj_ready[i]) @(negedge clk);
    @(posedge clk);
    #1 drv_valid[i] = 1'b0;
  endtask

  initial begin
    tb_bfs_dist(S, K, dist0);
    for (int i = 0; i < N; i++) begin
      drv_valid[i] = 1'b0;
      drv_pkt[i]   = '0;
      drv_ready[i] = 1'b1;
      seq[i]       = 0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // Phase A: shift traffic, one offset at a time.
    for (int d = 0; d < N; d++) begin
      for (int i = 0; i < N; i++) begin
        automatic int ii = i, dd = d;
        fork offer(ii, (ii + dd) % N); join_none
      end
      wait fork;
      wait (received == sent);
    end
    check(received == N * N, $sformatf("phase A delivered %0d of %0d", received, N * N));
    check(max_hops == dist0.max()[0], "the network diameter was not reached");
    $display("phase A: %0d packets, diameter %0d", received, max_hops);

    // Phase B: random traffic with random ejection back-pressure.
    phase = 1;
    fork
      begin
        forever begin
          @(negedge clk);
          for (int i = 0; i < N; i++) drv_ready[i] = ($urandom_range(9) < 7);
        end
      end
    join_none
    for (int i = 0; i < N; i++) begin
      automatic int ii = i;
      fork
        for (int p = 0; p < NPKT; p++) begin
          repeat ($urandom_range(2)) @(posedge clk);
          offer(ii, (p == 0) ? ii : int'($urandom_range(N - 1)));
        end
      join_none
    end
    wait (sent == N * N + N * NPKT);
    wait (received == sent);
    repeat (10) @(posedge clk);

    check(received == sent, $sformatf("sent %0d, received %0d", sent, received));
    check(out_dst.size() == 0, "packets left in the network");
    check(link_hops == ref_hops, $sformatf("links carried %0d hops, routing rule needs %0d",
                                           link_hops, ref_hops));
    check(left_hops > 0, "no step to the left");
    check(right_hops > 0, "no step to the right");
    check(overshoot_steps > 0, "no overstepping step");
    check(self_sends > 0, "no packet sent to its own node");
    check(delayed > 0, "no packet was delayed by contention");
    check(inj_stall > 0, "injection never stalled");
    check(ej_stall > 0, "ejection never back-pressured");
    $display("packets=%0d hops=%0d left=%0d right=%0d overshoot=%0d self=%0d delayed=%0d inj_stall=%0d ej_stall=%0d cycles=%0d",
             received, link_hops, left_hops, right_hops, overshoot_steps, self_sends, delayed,
             inj_stall, ej_stall, cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
