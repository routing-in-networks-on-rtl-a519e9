// tb_mc_ref_pkg: reference models for the testbenches of the multiplicative
// circulant NoC, written independently of the RTL with plain integers.
//  - tb_bfs_dist: shortest distance from node 0 to every node of MC(s,k),
//    found by breadth-first search over the graph (by symmetry of the
//    circulant, the distance from a to b is dist0[(b - a) mod n]).
//  - tb_next_node: the node a packet moves to in one step of the
//    nearest-generatrix rule (the routing rule the hardware implements).
//  - tb_port_of_step: the port number of a step of length +/- g.
package tb_mc_ref_pkg;

  function automatic int tb_pow(int s, int e);
    int r = 1;
    for (int i = 0; i < e; i++) r *= s;
    return r;
  endfunction

  // Breadth-first search from node 0.
  function automatic void tb_bfs_dist(int s, int k, ref int dist0[]);
    int n = tb_pow(s, k);
    int queue[$];
    dist0 = new[n];
    foreach (dist0[i]) dist0[i] = -1;
    dist0[0] = 0;
    queue.push_back(0);
    while (queue.size() > 0) begin
      int u = queue.pop_front();
      for (int j = 0; j < k; j++) begin
        int g = tb_pow(s, j);
        int vs[2];
        vs[0] = (u + g) % n;
        vs[1] = (u - g + n) % n;
        foreach (vs[x]) if (dist0[vs[x]] < 0) begin
          dist0[vs[x]] = dist0[u] + 1;
          queue.push_back(vs[x]);
        end
      end
    end
  endfunction

  // Signed step (+g or -g) taken at node cur for destination dst; 0 = arrived.
  function automatic int tb_step(int s, int k, int cur, int dst);
    int n = tb_pow(s, k);
    int rel = ((dst - cur) % n + n) % n;
    int d, sign, best;
    if (rel == 0) return 0;
    if (2 * rel <= n) begin sign = 1;  d = rel;     end
    else              begin sign = -1; d = n - rel; end
    // the generatrix with the smallest |g - d|, the shorter one on a tie
    best = 1;
    for (int j = 0; j < k; j++) begin
      int g = tb_pow(s, j);
      int e  = (g > d) ? g - d : d - g;
      int eb = (best > d) ? best - d : d - best;
      if (e < eb) best = g;
    end
    return sign * best;
  endfunction

  function automatic int tb_next_node(int s, int k, int cur, int dst);
    int n = tb_pow(s, k);
    return ((cur + tb_step(s, k, cur, dst)) % n + n) % n;
  endfunction

  // Port numbering: 0 local, 1..k left at s^(k-1)..1, k+1..2k right at 1..s^(k-1);
  // for s = 2 both directions at n/2 use the right port.
  function automatic int tb_port_of_step(int s, int k, int step);
    int n = tb_pow(s, k);
    if (step == 0) return 0;
    for (int j = 0; j < k; j++) begin
      int g = tb_pow(s, j);
      if (step == g) return k + 1 + j;
      if (step == -g) return (s == 2 && 2 * g == n) ? k + 1 + j : k - j;
    end
    return -1;
  endfunction

  // Hops the routing rule takes from a to b.
  function automatic int tb_route_hops(int s, int k, int a, int b);
    int h = 0;
    int cur = a;
    while (cur != b && h < 64) begin
      cur = tb_next_node(s, k, cur, b);
      h++;
    end
    return h;
  endfunction

endpackage
