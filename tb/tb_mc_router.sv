// tb_mc_router: self-checking test of one router, node 5 of MC(4,3).
//
// Every one of the 7 inputs is driven by a source that offers packets with
// random destinations and keeps each offer unchanged until it is taken;
// every output is drained by a sink whose ready is random. A scoreboard
// expects each accepted packet on exactly the port given by the reference
// next-hop rule (tb_mc_ref_pkg), and packets from one input to one output
// in their original order. First a lone packet per output port is sent on
// an idle router to check the one-cycle hop: accepted at clock edge t, it
// must be taken from its output at edge t+1. The test also counts that
// output contention (two heads wanting one port) and back-pressure (an
// output not ready, an input buffer full) happened.
module tb_mc_router;
  import tb_mc_ref_pkg::*;

  localparam int S = 4, K = 3, N = 64, ID = 5;
  localparam int NP = 2 * K + 1;
  localparam int AW = 6, DW = 32, PW = AW + DW;
  localparam int NPKT = 400;  // packets per input in the random phase

  logic clk = 0, rst_n = 0;
  logic [NP-1:0]         in_valid, in_ready, out_valid, out_ready;
  logic [NP-1:0][PW-1:0] in_pkt, out_pkt;

  mc_router #(.S(S), .K(K), .ID(ID)) u_dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_pkt, .out_valid, .out_ready, .out_pkt
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // Expected packets, per (input, output), as {data} words.
  logic [PW-1:0] expq[NP][NP][$];
  int sent = 0, received = 0;
  int contention = 0, out_stall = 0, in_full = 0;
  int accept_cycle[NP];
  int phase = 0;

  function automatic int exp_port(logic [PW-1:0] p);
    return tb_port_of_step(S, K, tb_step(S, K, ID, int'(p[PW-1 -: AW])));
  endfunction

  // Scoreboard on the clock edge.
  always @(posedge clk) if (rst_n) begin
    cycle++;
    for (int i = 0; i < NP; i++)
      if (in_valid[i] && in_ready[i]) begin
        expq[i][exp_port(in_pkt[i])].push_back(in_pkt[i]);
        accept_cycle[i] = cycle;
        sent++;
      end
    for (int o = 0; o < NP; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        automatic int src = int'(out_pkt[o][DW-1 -: 4]);
        received++;
        if (src >= NP || expq[src][o].size() == 0)
          check(0, $sformatf("unexpected packet %h on output %0d", out_pkt[o], o));
        else begin
          check(out_pkt[o] == expq[src][o].pop_front(),
                $sformatf("packet on output %0d out of order or wrong", o));
          if (phase == 0)
            check(cycle == accept_cycle[src] + 1,
                  $sformatf("lone packet took %0d cycles, expected 1", cycle - accept_cycle[src]));
        end
      end
      if (out_valid[o] && !out_ready[o]) out_stall++;
      if ($countones(u_dut.req[o]) > 1) contention++;
    end
    for (int i = 0; i < NP; i++) if (in_valid[i] && !in_ready[i]) in_full++;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One source per input: offers at a falling edge, then holds the offer
  // until a rising edge finds it accepted.
  int seq[NP];
  task automatic offer(int i, int dst);
    @(negedge clk);
    in_pkt[i]   = {AW'(dst), 4'(i), 28'(seq[i])};
    in_valid[i] = 1'b1;
    seq[i]++;
    while (!in_ready[i]) @(negedge clk);
    @(posedge clk);
    #1 in_valid[i] = 1'b0;
  endtask

  initial begin
    in_valid = '0; in_pkt = '0; out_ready = '1;
    foreach (seq[i]) seq[i] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // Phase 0: a lone packet to each port on an idle router.
    for (int o = 0; o < NP; o++) begin
      automatic int d = -1;
      for (int t = 0; t < N && d < 0; t++)
        if (tb_port_of_step(S, K, tb_step(S, K, ID, t)) == o) d = t;
      offer(o, d);
      repeat (4) @(posedge clk);
    end
    check(received == NP, "a lone packet was lost");

    // Phase 1: all inputs busy, random destinations and random ready.
    phase = 1;
    fork
      for (int i = 0; i < NP; i++) begin
        automatic int ii = i;
        fork
          for (int p = 0; p < NPKT; p++) begin
            if ($urandom_range(3) == 0) @(posedge clk);
            offer(ii, int'($urandom_range(N - 1)));
          end
        join_none
      end
      forever begin
        @(negedge clk);
        for (int o = 0; o < NP; o++) out_ready[o] = ($urandom_range(9) < 6);
      end
    join_none
    wait (sent == NP + NP * NPKT);
    @(negedge clk);
    out_ready = '1;
    repeat (50) @(posedge clk);

    check(received == sent, $sformatf("sent %0d, received %0d", sent, received));
    for (int i = 0; i < NP; i++)
      for (int o = 0; o < NP; o++)
        check(expq[i][o].size() == 0, $sformatf("packets from %0d to %0d missing", i, o));
    check(contention > 0, "output contention never happened");
    check(out_stall > 0, "output back-pressure never happened");
    check(in_full > 0, "an input buffer never filled");
    $display("packets=%0d contention=%0d out_stall=%0d in_full=%0d", received, contention,
             out_stall, in_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
