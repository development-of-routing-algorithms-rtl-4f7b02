// rc_pkg: shared types, constants and elaboration-time helpers for a
// network-on-chip built on the ring circulant topology C(N; 1, s2).
//
// In C(N; 1, s2) node v is linked to v+1, v-1, v+s2 and v-s2 (mod N), so
// every router has four network ports. The port numbering follows the
// router picture of the design (ports counted clockwise around a router):
//   port 0 : to v+1   (small generatrix, clockwise)
//   port 1 : to v+s2  (large generatrix, clockwise)
//   port 2 : to v-s2  (large generatrix, counter-clockwise)
//   port 3 : to v-1   (small generatrix, counter-clockwise)
// A flit sent on port p arrives at the neighbour on port 3-p; port 4 is the
// local (IP) port of every router.
//
// circ_dist() and table_hop() are constant functions used only to fill the
// routing tables at reset (the "pre-calculated routes" of table routing);
// they are not meant to be evaluated on signals.
package rc_pkg;

  // Number of network ports p = 2k for a circulant of order k = 2.
  localparam int unsigned NET_PORTS = 4;
  // Network ports plus the local port.
  localparam int unsigned ALL_PORTS = NET_PORTS + 1;
  localparam int unsigned PORT_W    = 2;   // ceil(log2 p) bits per table entry
  localparam int unsigned SEL_W     = 3;   // port index including the local port

  localparam logic [PORT_W-1:0] P_PLUS_S1  = 2'd0;
  localparam logic [PORT_W-1:0] P_PLUS_S2  = 2'd1;
  localparam logic [PORT_W-1:0] P_MINUS_S2 = 2'd2;
  localparam logic [PORT_W-1:0] P_MINUS_S1 = 2'd3;
  localparam logic [SEL_W-1:0]  P_LOCAL    = 3'd4;

  // Which of the three routing algorithms a router uses.
  typedef enum logic [1:0] {
    ALG_TABLE     = 2'd0,
    ALG_CLOCKWISE = 2'd1,
    ALG_ADAPTIVE  = 2'd2
  } routing_alg_e;

  // Node reached from node v through network port p, in C(n; 1, s2).
  function automatic int unsigned port_target(int unsigned n, int unsigned s2,
                                              int unsigned v, int unsigned p);
    case (p)
      0:       return (v + 1) % n;
      1:       return (v + s2) % n;
      2:       return (v + n - (s2 % n)) % n;
      default: return (v + n - 1) % n;
    endcase
  endfunction

  // Shortest hop count from node 0 to node d in C(n; 1, s2): a path uses k
  // steps of s2 (k signed, |k| <= n/2 is enough) and the rest on the ring.
  function automatic int unsigned circ_dist(int unsigned n, int unsigned s2,
                                            int unsigned d);
    int unsigned best, rem, ring, kabs;
    int k, moved;
    best = n;
    for (k = -int'(n / 2); k <= int'(n / 2); k++) begin
      kabs = (k < 0) ? -k : k;
      // position reached by k long steps, kept signed until reduced mod n
      moved = ((k * int'(s2)) % int'(n) + int'(n)) % int'(n);
      rem   = (d % n + n - unsigned'(moved)) % n;
      ring = (rem < n - rem) ? rem : n - rem;
      if (kabs + ring < best) best = kabs + ring;
    end
    return best;
  endfunction

  // Table entry: the lowest-numbered port that starts a shortest path from
  // node src to node dst. Entry for dst == src is unused and set to 0.
  function automatic logic [PORT_W-1:0] table_hop(int unsigned n, int unsigned s2,
                                                  int unsigned src, int unsigned dst);
    int unsigned d, dd, nxt;
    d = (dst + n - src) % n;
    if (d == 0) return '0;
    dd = circ_dist(n, s2, d);
    for (int p = 0; p < NET_PORTS; p++) begin
      nxt = port_target(n, s2, src, p);
      if (circ_dist(n, s2, (dst + n - nxt) % n) + 1 == dd) return PORT_W'(p);
    end
    return '0;
  endfunction

endpackage
