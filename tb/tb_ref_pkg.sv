// tb_ref_pkg: reference models used by the testbenches, written
// independently of the RTL.
//  * bfs_dist:    breadth-first search from node 0 in C(n; 1, s2) (the
//                 role Dijkstra's algorithm plays in the efficiency figure
//                 K = sum(hops of algorithm) / sum(shortest hops)).
//  * clockwise_next: the Find_Route_Clockwise procedure, one call per hop,
//                 on 0-based node numbers.
//  * step_cycles / adaptive_next: the Find_Route_Adaptive / Step_Cycles
//                 procedure, written out with integer arithmetic, using
//                 S = start - end + N for the left-hand distance.
//  * exp_port:    network port of a step (0:+1, 1:+s2, 2:-s2, 3:-1).
package tb_ref_pkg;

  localparam int MAXN = 512;

  function automatic int bfs_dist(int n, int s2, int d);
    int dst_of [MAXN];
    int queue [MAXN];
    int head, tail, v, w;
    int off [4];
    off[0] = 1; off[1] = s2; off[2] = n - s2; off[3] = n - 1;
    for (int i = 0; i < n; i++) dst_of[i] = -1;
    dst_of[0] = 0; queue[0] = 0; head = 0; tail = 1;
    while (head < tail) begin
      v = queue[head]; head++;
      for (int p = 0; p < 4; p++) begin
        w = (v + off[p]) % n;
        if (dst_of[w] < 0) begin
          dst_of[w] = dst_of[v] + 1;
          queue[tail] = w; tail++;
        end
      end
    end
    return dst_of[((d % n) + n) % n];
  endfunction

  function automatic int clockwise_next(int start_node, int end_node, int n, int s2);
    int s, nxt;
    s = end_node - start_node;
    if (s == 0) return start_node;
    if (s < 0) s = s + n;
    if (2 * s <= n) begin
      if (s >= s2) nxt = (s2 + start_node) % n;
      else         nxt = (1 + start_node) % n;
    end else begin
      s = n - s;
      if (s >= s2) nxt = (n - s2 + start_node) % n;
      else         nxt = (n - 1 + start_node) % n;
    end
    return nxt;
  endfunction

  function automatic void cand(int x, int s2, output int w1, output int w2);
    w1 = x / s2 + x % s2;
    w2 = x / s2 - x % s2 + s2 + 1;
  endfunction

  function automatic int step_cycles(int start_node, int end_node, int n, int s2);
    int best_r, best_l, step_r, step_l, s, a, b;
    s = end_node - start_node;
    cand(s, s2, a, b);
    if (s % s2 == 0) begin best_r = a; step_r = s2; end
    else if (a < b)  begin best_r = a; step_r = 1; end
    else             begin best_r = b; step_r = s2; end
    for (int k = 1; k <= 2; k++) begin
      cand(s + k * n, s2, a, b);
      if (a < best_r) begin best_r = a; step_r = s2; end
      if (b < best_r) begin best_r = b; step_r = s2; end
    end
    s = start_node - end_node + n;
    cand(s, s2, a, b);
    if (s % s2 == 0) begin best_l = a; step_l = -s2; end
    else if (a < b)  begin best_l = a; step_l = -1; end
    else             begin best_l = b; step_l = -s2; end
    for (int k = 1; k <= 2; k++) begin
      cand(s + k * n, s2, a, b);
      if (a < best_l) begin best_l = a; step_l = -s2; end
      if (b < best_l) begin best_l = b; step_l = -s2; end
    end
    return (best_r < best_l) ? step_r : step_l;
  endfunction

  function automatic int adaptive_step(int start_node, int end_node, int n, int s2);
    if (start_node > end_node) return -step_cycles(end_node, start_node, n, s2);
    else                       return step_cycles(start_node, end_node, n, s2);
  endfunction

  function automatic int adaptive_next(int start_node, int end_node, int n, int s2);
    return ((start_node + adaptive_step(start_node, end_node, n, s2)) % n + n) % n;
  endfunction

  // Port that leads from node a to neighbour b.
  function automatic int exp_port(int a, int b, int n, int s2);
    int d;
    d = ((b - a) % n + n) % n;
    if (d == 1)      return 0;
    if (d == s2)     return 1;
    if (d == n - s2) return 2;
    if (d == n - 1)  return 3;
    return -1;
  endfunction

endpackage
