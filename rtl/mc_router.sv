// mc_router: router of one node of a multiplicative circulant NoC MC(S,K).
//
// The router has NP = 2K+1 ports: port 0 to and from the node's IP core and
// 2K network ports, two per generatrix length S^j (left and right), numbered
// as in mc_pkg. A packet is a single word {dst, data}: the address field
// holds only the destination node number (ceil(log2 N) bits), as in the
// specialized algorithm; `data` is the payload.
//
// Each input port has a small FIFO (mc_fifo). The packet at the head of
// every FIFO is routed by its own mc_route_calc, which knows this router's
// number ID and returns the output port of the next step (port 0 when the
// packet has arrived). For every output port a round-robin arbiter
// (mc_rr_arbiter) picks one of the inputs whose head wants that port, and
// the picked head is switched to the output.
//
// Links use valid/ready: a word moves when valid and ready are both high;
// an offered word stays, unchanged, until it is taken (the arbiter holds its
// grant while the output is stalled). in_ready is the FIFO's registered
// "not full", so a packet that enters a FIFO at one clock edge can leave on
// the next: one cycle per router when nothing blocks it.
// The routing decision follows the paper; the ports per node follow its
// port rules. Buffering, the switch, arbitration, the handshake and the
// packet's payload are this design's own choices, since the paper does not
// describe them. Reset is active low and synchronous.
module mc_router
  import mc_pkg::*;
#(
  parameter int unsigned S         = MC_S_DEFAULT,
  parameter int unsigned K         = MC_K_DEFAULT,
  parameter int unsigned ID        = 0,
  parameter int unsigned DATA_W    = MC_DATA_W_DEFAULT,
  parameter int unsigned BUF_DEPTH = MC_BUF_DEPTH_DEFAULT,
  localparam int unsigned AW    = mc_addr_w(S, K),
  localparam int unsigned NP    = 2 * K + 1,
  localparam int unsigned PKT_W = AW + DATA_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NP-1:0]             in_valid,
  output logic [NP-1:0]             in_ready,
  input  logic [NP-1:0][PKT_W-1:0]  in_pkt,
  output logic [NP-1:0]             out_valid,
  input  logic [NP-1:0]             out_ready,
  output logic [NP-1:0][PKT_W-1:0]  out_pkt
);

  localparam int unsigned PW = $clog2(NP);

  typedef struct packed {
    logic [AW-1:0]     dst;
    logic [DATA_W-1:0] data;
  } pkt_t;

  pkt_t    head      [NP];
  logic    head_valid[NP];
  logic    head_pop  [NP];
  logic [PW-1:0] route [NP];

  logic [NP-1:0] req   [NP];   // req[o][i]: input i wants output o
  logic [NP-1:0] grant [NP];   // grant[o][i]
  logic [NP-1:0] stalled;      // output offered a word last cycle, not taken

  for (genvar i = 0; i < NP; i++) begin : g_in
    logic [PKT_W-1:0] head_bits;

    mc_fifo #(.W(PKT_W), .DEPTH(BUF_DEPTH)) u_fifo (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid[i]),
      .in_ready (in_ready[i]),
      .in_data  (in_pkt[i]),
      .out_valid(head_valid[i]),
      .out_ready(head_pop[i]),
      .out_data (head_bits)
    );
    assign head[i] = pkt_t'(head_bits);

    mc_route_calc #(.S(S), .K(K)) u_route (
      .cur      (AW'(ID)),
      .dst      (head[i].dst),
      .port     (route[i]),
      .arrived  (),
      .go_left  (),
      .gen_idx  (),
      .overshoot()
    );

    // An input leaves when the output it wants grants it and is ready.
    always_comb begin
      head_pop[i] = 1'b0;
      for (int unsigned o = 0; o < NP; o++)
        if (route[i] == PW'(o) && grant[o][i] && out_ready[o]) head_pop[i] = head_valid[i];
    end

    // Handshake rule on every input: an offered word waits unchanged.
    a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
      (in_valid[i] && !in_ready[i]) |=> (in_valid[i] && $stable(in_pkt[i])))
      else $error("router %0d input %0d changed a word that was not taken", ID, i);
  end

  for (genvar o = 0; o < NP; o++) begin : g_out
    always_comb begin
      for (int unsigned i = 0; i < NP; i++)
        req[o][i] = head_valid[i] && (route[i] == PW'(o));
    end

    mc_rr_arbiter #(.N(NP)) u_arb (
      .clk    (clk),
      .rst_n  (rst_n),
      .req    (req[o]),
      .hold   (stalled[o]),
      .advance(out_valid[o] && out_ready[o]),
      .grant  (grant[o])
    );

    always_comb begin
      out_valid[o] = |(grant[o] & req[o]);
      out_pkt[o]   = '0;
      for (int unsigned i = 0; i < NP; i++)
        if (grant[o][i]) out_pkt[o] = out_pkt[o] | PKT_W'(head[i]);
    end

    always_ff @(posedge clk) begin
      if (!rst_n) stalled[o] <= 1'b0;
      else        stalled[o] <= out_valid[o] && !out_ready[o];
    end

    a_grant_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant[o]))
      else $error("router %0d output %0d granted two inputs", ID, o);
    a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
      (out_valid[o] && !out_ready[o]) |=> (out_valid[o] && $stable(out_pkt[o])))
      else $error("router %0d output %0d dropped or changed an offered word", ID, o);
  end

endmodule
