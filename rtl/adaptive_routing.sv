// adaptive_routing: adaptive routing unit of one router of C(N; 1, s2).
//
// The head flit carries the destination node number. The router stores its
// own number, N and s2 (registers, loaded from the parameters at reset and
// writable through cfg_*: cfg_addr 0 = N, 1 = s2, 2 = own number).
//
// For every hop the unit evaluates, fully combinationally, the
// Find_Route_Adaptive / Step_Cycles procedure:
//  * Operands are ordered so that a = min(own, dst), b = max(own, dst) and
//    S = b - a > 0; if own > dst the chosen step is mirrored afterwards.
//  * A distance x is covered either by q = x / s2 long steps and r = x mod s2
//    unit steps (q + r hops), or by q+1 long steps and s2 - r unit steps back
//    (q - r + s2 + 1 hops). This is tried for x = S, S+N, S+2N going right
//    (routes that pass the ring origin up to two times, "cycles") and for
//    x = N-S, 2N-S, 3N-S going left. The cheapest right and left candidates
//    are kept with the first step they imply (+1 or +s2 only where the
//    direct right route with r != 0 is the cheaper form; every route that
//    wraps starts with a long step).
//  * Right wins if strictly cheaper, otherwise left.
// The procedure gives shortest routes for circulants whose shortest routes
// pass the origin at most twice; larger networks need more candidate terms.
//
// The left distance is taken as N - S. The printed algorithm writes
// "S <- endNode - startNode + N", which is congruent to the right distance and
// does not reproduce the example route 1-57-13-69-25-81-37-38 of C(100;1,44);
// N - S does.
//
// Outputs: is_local when dst == own; out_port is the network port of the
// step; next_node is own + step (mod N). addr_out = addr_in. All outputs are
// combinational in addr_in and the stored registers.
module adaptive_routing
  import rc_pkg::*;
#(
  parameter int unsigned N      = 100,
  parameter int unsigned S2     = 44,
  parameter int unsigned ID     = 0,
  parameter int unsigned NODE_W = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned CNT_W  = $clog2(N + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [NODE_W-1:0] cfg_addr,
  input  logic [CNT_W-1:0]  cfg_data,
  input  logic [NODE_W-1:0] addr_in,
  output logic              is_local,
  output logic [PORT_W-1:0] out_port,
  output logic [NODE_W-1:0] addr_out,
  output logic [NODE_W-1:0] next_node
);

  // Wide enough for 3N and for hop counts.
  localparam int unsigned W = CNT_W + 2;

  logic [CNT_W-1:0]  n_reg, s2_reg;
  logic [NODE_W-1:0] own_reg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_reg   <= CNT_W'(N);
      s2_reg  <= CNT_W'(S2);
      own_reg <= NODE_W'(ID);
    end else if (cfg_we) begin
      if (cfg_addr == NODE_W'(0)) n_reg   <= cfg_data;
      if (cfg_addr == NODE_W'(1)) s2_reg  <= cfg_data;
      if (cfg_addr == NODE_W'(2)) own_reg <= cfg_data[NODE_W-1:0];
    end
  end

  // Hop counts of the two ways to cover distance x with generatrices 1, s2.
  function automatic void ways(input logic [W-1:0] x, input logic [W-1:0] g,
                               output logic [W-1:0] w1, output logic [W-1:0] w2,
                               output logic rz);
    logic [W-1:0] q, r;
    q  = (g == '0) ? '0 : x / g;
    r  = (g == '0) ? '0 : x % g;
    w1 = q + r;
    w2 = q + g + 1'b1 - r;
    rz = (r == '0);
  endfunction

  logic [W-1:0]  nw, g, s, sl;
  logic [W-1:0]  a0, b0, a1, b1, a2, b2;
  logic [W-1:0]  c0, d0, c1, d1, c2, d2;
  logic          rz0, rz1, rz2, lz0, lz1, lz2;
  logic [W-1:0]  best_r, best_l;
  logic          long_r, long_l;   // step is over s2 (else over 1)
  logic          go_right, mirror, step_plus, step_long;

  always_comb begin
    nw     = W'(n_reg);
    g      = W'(s2_reg);
    mirror = (own_reg > addr_in);
    s      = mirror ? W'(own_reg) - W'(addr_in) : W'(addr_in) - W'(own_reg);
    sl     = nw - s;

    // Right-hand candidates (Step_Cycles lines 1-19).
    ways(s,           g, a0, b0, rz0);
    ways(s + nw,      g, a1, b1, rz1);
    ways(s + nw + nw, g, a2, b2, rz2);
    if (rz0)            begin best_r = a0; long_r = 1'b1; end
    else if (a0 < b0)   begin best_r = a0; long_r = 1'b0; end
    else                begin best_r = b0; long_r = 1'b1; end
    if (a1 < best_r)    begin best_r = a1; long_r = 1'b1; end
    if (b1 < best_r)    begin best_r = b1; long_r = 1'b1; end
    if (a2 < best_r)    begin best_r = a2; long_r = 1'b1; end
    if (b2 < best_r)    begin best_r = b2; long_r = 1'b1; end

    // Left-hand candidates (Step_Cycles lines 20-37).
    ways(sl,           g, c0, d0, lz0);
    ways(sl + nw,      g, c1, d1, lz1);
    ways(sl + nw + nw, g, c2, d2, lz2);
    if (lz0)            begin best_l = c0; long_l = 1'b1; end
    else if (c0 < d0)   begin best_l = c0; long_l = 1'b0; end
    else                begin best_l = d0; long_l = 1'b1; end
    if (c1 < best_l)    begin best_l = c1; long_l = 1'b1; end
    if (d1 < best_l)    begin best_l = d1; long_l = 1'b1; end
    if (c2 < best_l)    begin best_l = c2; long_l = 1'b1; end
    if (d2 < best_l)    begin best_l = d2; long_l = 1'b1; end

    // Step_Cycles lines 38-41, then the mirroring of Find_Route_Adaptive.
    go_right  = (best_r < best_l);
    step_long = go_right ? long_r : long_l;
    step_plus = go_right ^ mirror;

    is_local = (addr_in == own_reg);
    unique case ({step_plus, step_long})
      2'b10:   out_port = P_PLUS_S1;
      2'b11:   out_port = P_PLUS_S2;
      2'b01:   out_port = P_MINUS_S2;
      default: out_port = P_MINUS_S1;
    endcase

    case (out_port)
      P_PLUS_S1:  next_node = NODE_W'((W'(own_reg) + 1'b1) % nw);
      P_PLUS_S2:  next_node = NODE_W'((W'(own_reg) + g) % nw);
      P_MINUS_S2: next_node = NODE_W'((W'(own_reg) + nw - g) % nw);
      default:    next_node = NODE_W'((W'(own_reg) + nw - 1'b1) % nw);
    endcase
    if (nw == '0) next_node = own_reg;
    addr_out = addr_in;
  end

endmodule
