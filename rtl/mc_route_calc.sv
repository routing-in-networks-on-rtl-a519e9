// mc_route_calc: next-hop decision of the specialized routing algorithm for
// a multiplicative circulant MC(S,K) (N = S^K nodes, generatrices
// 1, S, ..., S^(K-1)).
//
// The router does not compute a whole path; from its own number `cur` and
// the packet's destination `dst` it finds only the next step:
//   1. The destination is re-expressed relative to node 0:
//      rel = (dst - cur) mod N.  rel = 0 means the packet has arrived.
//   2. The direction is chosen on the shorter half of the ring: right
//      (towards higher numbers) when rel <= N/2, otherwise left, with the
//      remaining distance D = rel or N - rel.
//   3. The largest generatrix not above D, S^j, and the next longer one,
//      S^(j+1), are compared; the one closer to D is taken. Taking the longer
//      one oversteps the destination; the next router then routes back.
// Steps 1-3 follow the paper. Ties in step 3 go to the shorter generatrix
// and rel = N/2 exactly goes right: both are this design's choices (the
// hop count is the same either way).
//
// Interface: purely combinational. `port` uses the numbering of mc_pkg
// (0 = local, 1..K left at S^(K-1)..1, K+1..2K right at 1..S^(K-1)); for
// S = 2 a left step at N/2 is sent through the single N/2 port (right).
// `arrived`, `go_left`, `gen_idx` and `overshoot` describe the decision.
module mc_route_calc
  import mc_pkg::*;
#(
  parameter int unsigned S = MC_S_DEFAULT,
  parameter int unsigned K = MC_K_DEFAULT,
  localparam int unsigned AW = mc_addr_w(S, K),
  localparam int unsigned NP = 2 * K + 1,
  localparam int unsigned PW = $clog2(NP),
  localparam int unsigned GW = (K > 1) ? $clog2(K) : 1
) (
  input  logic [AW-1:0] cur,        // this router's node number
  input  logic [AW-1:0] dst,        // destination node number from the packet
  output logic [PW-1:0] port,       // output port for the next step
  output logic          arrived,    // dst == cur: deliver to the local port
  output logic          go_left,    // step is towards lower node numbers
  output logic [GW-1:0] gen_idx,    // index j of the generatrix S^j taken
  output logic          overshoot   // generatrix taken is longer than D
);

  // Distances need one bit more than node numbers (N may equal 2^AW).
  localparam int unsigned DW = AW + 1;
  localparam logic [DW-1:0] N = DW'(mc_pow(S, K));
  localparam logic [DW-1:0] HALF = DW'(mc_pow(S, K) / 2);

  // Generatrix lengths S^0 .. S^(K-1), and a copy shifted down by one
  // (entry j holds S^(j+1); the last entry, with no longer generatrix, is 0).
  typedef logic [K-1:0][DW-1:0] gen_vec_t;
  function automatic gen_vec_t gen_table(input int unsigned shift);
    gen_vec_t g;
    for (int unsigned j = 0; j < K; j++)
      g[j] = (j + shift < K) ? DW'(mc_pow(S, j + shift)) : '0;
    return g;
  endfunction
  localparam gen_vec_t GEN      = gen_table(0);
  localparam gen_vec_t GEN_NEXT = gen_table(1);

  logic [DW-1:0] rel, remain, lower, upper;
  logic [GW-1:0] j_low, j_sel;
  logic          has_upper, take_upper;

  always_comb begin
    // Step 1: destination relative to this node.
    if (dst >= cur) rel = DW'(dst) - DW'(cur);
    else            rel = N - (DW'(cur) - DW'(dst));
    arrived = (rel == '0);

    // Step 2: direction and remaining distance.
    go_left = !arrived && (rel > HALF);
    remain  = go_left ? (N - rel) : rel;

    // Step 3: largest generatrix not above the distance (generatrices grow
    // with j, so the last one that fits wins) ...
    j_low = '0;
    for (int unsigned j = 1; j < K; j++)
      if (GEN[j] <= remain) j_low = GW'(j);
    lower     = GEN[j_low];
    upper     = GEN_NEXT[j_low];
    has_upper = (32'(j_low) + 1 < K);
    // ... against the next longer one, if there is one.
    take_upper = !arrived && has_upper && ((upper - remain) < (remain - lower));
    j_sel      = take_upper ? j_low + 1'b1 : j_low;
    overshoot  = take_upper;
    gen_idx    = j_sel;

    if (arrived)
      port = '0;
    else if (go_left && !(S == 2 && 32'(j_sel) == K - 1))
      port = PW'(K) - PW'(j_sel);            // left at S^j_sel
    else
      port = PW'(K + 1) + PW'(j_sel);        // right at S^j_sel
  end

endmodule
