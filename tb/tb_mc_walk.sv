// tb_mc_walk: helper for tb_mc_workloads. Walks packets through one
// mc_route_calc of MC(S,K), feeding each step's neighbour back in as the
// current node, from node 0 to every node (by the circulant's symmetry this
// covers all pairs) and between 200 random pairs. Every walk must reach its
// destination in exactly the breadth-first-search distance. The diameter
// found must equal DIAM, and the mean distance over all N destinations
// (self included), in hundredths, must lie in [AVG_LO, AVG_HI] unless
// AVG_LO < 0. Results are reported through `checks`/`failures` once
// `done` rises.
module tb_mc_walk
  import tb_mc_ref_pkg::*;
  import mc_pkg::*;
#(
  parameter int S = 2,
  parameter int K = 4,
  parameter int DIAM = 2,
  parameter int AVG_LO = -1,
  parameter int AVG_HI = -1
) (
  output int checks,
  output int failures,
  output bit done
);
  localparam int N = S ** K;
  localparam int AW = mc_addr_w(S, K);
  localparam int NP = 2 * K + 1;
  localparam int PW = $clog2(NP);
  localparam int GW = (K > 1) ? $clog2(K) : 1;

  logic [AW-1:0] cur, dst;
  logic [PW-1:0] port;
  logic          arrived, go_left, overshoot;
  logic [GW-1:0] gen_idx;

  mc_route_calc #(.S(S), .K(K)) u_dut (
    .cur, .dst, .port, .arrived, .go_left, .gen_idx, .overshoot
  );

  function automatic int via_port(int c, int p);
    if (p == 0) return c;
    if (p <= K) return (c - tb_pow(S, K - p) + N) % N;
    if (S == 2 && p == 2 * K) return (c + N / 2) % N;
    return (c + tb_pow(S, p - K - 1)) % N;
  endfunction

  task automatic walk(int a, int b, output int hops);
    int c = a;
    hops = 0;
    dst = AW'(b);
    cur = AW'(c);
    #1;
    while (!arrived && hops <= 2 * DIAM + 2) begin
      c = via_port(c, int'(port));
      hops++;
      cur = AW'(c);
      #1;
    end
  endtask

  // Breadth-first-search distance from node 0 to every node.
  int dist0[N];
  task automatic bfs();
    int queue[$];
    foreach (dist0[i]) dist0[i] = -1;
    dist0[0] = 0;
    queue.push_back(0);
    while (queue.size() > 0) begin
      int u = queue.pop_front();
      for (int j = 0; j < K; j++)
        for (int sgn = -1; sgn <= 1; sgn += 2) begin
          int v = ((u + sgn * tb_pow(S, j)) % N + N) % N;
          if (dist0[v] < 0) begin
            dist0[v] = dist0[u] + 1;
            queue.push_back(v);
          end
        end
    end
  endtask

  initial begin
    int h, sum, diam, avg100;
    checks = 0; failures = 0; done = 0;
    sum = 0; diam = 0;
    bfs();
    for (int d = 0; d < N; d++) begin
      walk(0, d, h);
      checks++;
      if (h != dist0[d]) begin
        failures++;
        $display("FAIL MC(%0d,%0d): 0 -> %0d took %0d hops, shortest is %0d", S, K, d, h, dist0[d]);
      end
      sum += h;
      if (h > diam) diam = h;
    end
    for (int t = 0; t < 200; t++) begin
      int a, b;
      a = int'($urandom_range(N - 1));
      b = int'($urandom_range(N - 1));
      walk(a, b, h);
      checks++;
      if (h != dist0[((b - a) % N + N) % N]) begin
        failures++;
        $display("FAIL MC(%0d,%0d): %0d -> %0d took %0d hops", S, K, a, b, h);
      end
    end
    avg100 = (sum * 100 + N / 2) / N;
    checks++;
    if (diam != DIAM) begin
      failures++;
      $display("FAIL MC(%0d,%0d): diameter %0d, expected %0d", S, K, diam, DIAM);
    end
    if (AVG_LO >= 0) begin
      checks++;
      if (avg100 < AVG_LO || avg100 > AVG_HI) begin
        failures++;
        $display("FAIL MC(%0d,%0d): mean distance %0d/100 outside [%0d, %0d]", S, K, avg100,
                 AVG_LO, AVG_HI);
      end
    end
    $display("MC(%0d,%0d) N=%0d: diameter %0d, mean distance %0d.%02d", S, K, N, diam,
             avg100 / 100, avg100 % 100);
    done = 1;
  end
endmodule
