// mc_pkg: constants and helper functions shared by the multiplicative
// circulant (MC) network-on-chip.
//
// A multiplicative circulant MC(s,k) has N = s^k nodes numbered 0..N-1 and
// the k generatrices 1, s, s^2, ..., s^(k-1): node i is linked to the nodes
// i +/- s^j (mod N). This package gives the default size of the network,
// the generatrix values and the numbering of a router's ports.
//
// Port numbering (this design's own choice). Port 0 is the local port that
// faces the node's IP core. The 2k network ports follow in the order
//   1 .. k      : "left"  at s^(k-1), ..., s, 1   (towards lower node numbers)
//   k+1 .. 2k   : "right" at 1, s, ..., s^(k-1)   (towards higher numbers)
// i.e. the order -(16) -(4) -(1) +(1) +(4) +(16) in which port rules are
// listed for MC(4,3), with the value 0 kept for "arrived here".
// For s = 2 the left and right links at s^(k-1) = N/2 lead to the same
// node, so only the right one exists; port 1 is then left unconnected.
package mc_pkg;

  // Default network: MC(4,3), 64 nodes, the circulant of the worked example.
  parameter int unsigned MC_S_DEFAULT = 4;
  parameter int unsigned MC_K_DEFAULT = 3;
  // Payload bits carried beside the destination address (not given: assumed).
  parameter int unsigned MC_DATA_W_DEFAULT = 32;
  // Depth of each router input buffer (not given: assumed).
  parameter int unsigned MC_BUF_DEPTH_DEFAULT = 2;

  // s^e as a 64-bit value.
  function automatic longint unsigned mc_pow(input int unsigned s, input int unsigned e);
    longint unsigned r;
    r = 1;
    for (int unsigned i = 0; i < e; i++) r = r * s;
    return r;
  endfunction

  // Width of the address field, P = ceil(log2 N); at least 1 bit.
  function automatic int unsigned mc_addr_w(input int unsigned s, input int unsigned k);
    longint unsigned n;
    int unsigned w;
    n = mc_pow(s, k);
    w = 1;
    while ((longint'(1) << w) < n) w++;
    return w;
  endfunction

  // Port that leads left (downwards) along generatrix s^j.
  function automatic int unsigned mc_port_left(input int unsigned k, input int unsigned j);
    return k - j;
  endfunction

  // Port that leads right (upwards) along generatrix s^j.
  function automatic int unsigned mc_port_right(input int unsigned k, input int unsigned j);
    return k + 1 + j;
  endfunction

endpackage
