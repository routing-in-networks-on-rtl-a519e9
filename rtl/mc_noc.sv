// mc_noc: network on chip with multiplicative circulant topology MC(S,K).
//
// N = S^K routers (mc_router), numbered 0..N-1, are joined by the links of
// the circulant graph with generatrices 1, S, ..., S^(K-1): router m's
// right port at S^j is wired to router (m + S^j) mod N's left port at S^j,
// one link in each direction. For S = 2 the generatrix S^(K-1) = N/2 joins
// m and m + N/2 from both sides, so that single link runs between the two
// routers' right ports at N/2 and their left ports at N/2 stay unused
// (each node then has one port less, as the paper notes for MC(2,k)).
// The defaults build MC(4,3): 64 nodes with links of length 1, 4 and 16.
//
// The topology and the per-hop routing follow the paper. The IP cores at the
// nodes are outside this module: port 0 of every router is brought out as
// an injection channel (inj_*) and an ejection channel (ej_*), each a
// valid/ready link carrying one packet {dst, data} per transfer, dst in the
// top ceil(log2 N) bits. Every hop costs one clock cycle when nothing
// blocks; a packet offered at inj and accepted at clock edge t appears on
// ej of its destination so that it is taken at edge t + hops + 1 at the
// earliest. Reset is active low and synchronous.
module mc_noc
  import mc_pkg::*;
#(
  parameter int unsigned S         = MC_S_DEFAULT,
  parameter int unsigned K         = MC_K_DEFAULT,
  parameter int unsigned DATA_W    = MC_DATA_W_DEFAULT,
  parameter int unsigned BUF_DEPTH = MC_BUF_DEPTH_DEFAULT,
  localparam int unsigned N     = S ** K,
  localparam int unsigned AW    = mc_addr_w(S, K),
  localparam int unsigned PKT_W = AW + DATA_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // From the IP cores into the network
  input  logic [N-1:0]             inj_valid,
  output logic [N-1:0]             inj_ready,
  input  logic [N-1:0][PKT_W-1:0]  inj_pkt,
  // From the network to the IP cores
  output logic [N-1:0]             ej_valid,
  input  logic [N-1:0]             ej_ready,
  output logic [N-1:0][PKT_W-1:0]  ej_pkt
);

  localparam int unsigned NP = 2 * K + 1;

  // Neighbour reached through port p of node m, and the port on which that
  // neighbour sees the same link. Port 0 (local) has no neighbour.
  function automatic int unsigned nbr_node(input int unsigned m, input int unsigned p);
    longint unsigned g;
    if (p == 0) return m;
    if (p <= K) begin
      g = mc_pow(S, K - p);                  // left at S^(K-p)
      return int'((longint'(m) + longint'(N) - g) % longint'(N));
    end
    g = mc_pow(S, p - K - 1);                // right at S^(p-K-1)
    return int'((longint'(m) + g) % longint'(N));
  endfunction

  function automatic int unsigned nbr_port(input int unsigned p);
    if (p == 0) return 0;
    if (p <= K) return mc_port_right(K, K - p);
    if (S == 2 && p == 2 * K) return p;      // the single N/2 link
    return mc_port_left(K, p - K - 1);
  endfunction

  // Port 1 (left at N/2) does not exist when S = 2.
  function automatic bit port_used(input int unsigned p);
    return !(S == 2 && p == 1);
  endfunction

  logic [NP-1:0]            r_in_valid  [N];
  logic [NP-1:0]            r_in_ready  [N];
  logic [NP-1:0][PKT_W-1:0] r_in_pkt    [N];
  logic [NP-1:0]            r_out_valid [N];
  logic [NP-1:0]            r_out_ready [N];
  logic [NP-1:0][PKT_W-1:0] r_out_pkt   [N];

  for (genvar m = 0; m < N; m++) begin : g_node
    mc_router #(
      .S(S), .K(K), .ID(m), .DATA_W(DATA_W), .BUF_DEPTH(BUF_DEPTH)
    ) u_router (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (r_in_valid[m]),
      .in_ready (r_in_ready[m]),
      .in_pkt   (r_in_pkt[m]),
      .out_valid(r_out_valid[m]),
      .out_ready(r_out_ready[m]),
      .out_pkt  (r_out_pkt[m])
    );

    // Local port to and from the IP core.
    assign r_in_valid[m][0]  = inj_valid[m];
    assign r_in_pkt[m][0]    = inj_pkt[m];
    assign inj_ready[m]      = r_in_ready[m][0];
    assign ej_valid[m]       = r_out_valid[m][0];
    assign ej_pkt[m]         = r_out_pkt[m][0];
    assign r_out_ready[m][0] = ej_ready[m];

    // Network ports: the circulant's links.
    for (genvar p = 1; p < NP; p++) begin : g_link
      localparam int unsigned NB = nbr_node(m, p);
      localparam int unsigned NBP = nbr_port(p);
      if (port_used(p)) begin : g_used
        assign r_in_valid[m][p]  = r_out_valid[NB][NBP];
        assign r_in_pkt[m][p]    = r_out_pkt[NB][NBP];
        assign r_out_ready[m][p] = r_in_ready[NB][NBP];
      end else begin : g_unused
        assign r_in_valid[m][p]  = 1'b0;
        assign r_in_pkt[m][p]    = '0;
        assign r_out_ready[m][p] = 1'b0;
      end
    end
  end

endmodule
