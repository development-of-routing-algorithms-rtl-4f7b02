// noc_harness: traffic generator and scoreboard around one circulant_noc.
//
// After reset it runs, for the routing algorithm ALG on C(N; 1, S2):
//  1. one lone packet from node 0 to node N/2; its latency must be exactly
//     2*(hops+1) clock edges (two per router on the path, source and
//     destination included);
//  2. random traffic: every node injects PKTS packets to random other nodes
//     with random gaps while the IP side accepts ejected flits only part of
//     the time (backpressure);
//  2b. a hot spot: one node stops accepting while all others send it HOT
//     packets back to back, until buffers fill and injections stall;
//  3. for table routing only: the table entry of node 0 for destination
//     N/2 is rewritten to a port that does not start a shortest path and a
//     packet must take one extra hop.
// Every packet must arrive once, at its destination, with its data. Its hop
// count (counted on the network links) must equal the shortest distance
// (table, adaptive) or the length of the reference clockwise walk
// (clockwise). The harness counts how often each mechanism occurred:
// hops over each of the four port kinds, stalled injections, stalled
// ejections, routes longer than the shortest one, routes that cross the
// origin of the node numbering (a "cycle"), and table rewrites.
module noc_harness
  import tb_ref_pkg::*;
#(
  parameter int                   N    = 49,
  parameter int                   S2   = 6,
  parameter rc_pkg::routing_alg_e ALG  = rc_pkg::ALG_ADAPTIVE,
  parameter int                   PKTS = 20,
  parameter int                   HOT  = 8
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   delivered,
  output int   port_hops [4],
  output int   inj_stalls,
  output int   ej_stalls,
  output int   longer_routes,
  output int   origin_cross,
  output int   table_writes
);

  localparam int NW = $clog2(N);
  localparam int CW = $clog2(N + 1);
  localparam int DW = 32;
  localparam int FW = NW + DW;
  localparam int MAXP = N * (PKTS + HOT) + 16;

  logic [N-1:0]          cfg_we;
  logic [NW-1:0]         cfg_addr;
  logic [CW-1:0]         cfg_data;
  logic [N-1:0]          inj_valid, inj_ready, ej_valid, ej_ready;
  logic [N-1:0][FW-1:0]  inj_flit, ej_flit;

  circulant_noc #(.N(N), .S2(S2), .ALG(ALG), .DATA_W(DW)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .inj_valid, .inj_ready, .inj_flit, .ej_valid, .ej_ready, .ej_flit
  );

  int p_src [MAXP], p_dst [MAXP], p_hops [MAXP], p_t0 [MAXP], p_exp [MAXP];
  bit p_live [MAXP];
  int n_pkts = 0;
  longint cyc = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL [alg %0d]: %s", ALG, what);
    end
  endtask

  function automatic int ref_hops(int s, int d);
    int h, v;
    if (ALG != rc_pkg::ALG_CLOCKWISE) return bfs_dist(N, S2, d - s);
    h = 0; v = s;
    while (v != d && h <= N) begin
      v = clockwise_next(v, d, N, S2);
      h++;
    end
    return h;
  endfunction

  function automatic logic [FW-1:0] make_flit(int s, int d, int tag);
    int a;
    a = (ALG == rc_pkg::ALG_CLOCKWISE) ? ((d - s) % N + N) % N : d;
    return {NW'(a), DW'(tag)};
  endfunction

  // Link and local-port monitor.
  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int v = 0; v < N; v++) begin
      for (int p = 0; p < 4; p++) begin
        if (dut.r_out_valid[v][p] && dut.r_out_ready[v][p]) begin
          int tag, t;
          tag = int'(dut.r_out_flit[v][p][15:0]);
          t = (p == 0) ? (v + 1) % N : (p == 1) ? (v + S2) % N :
              (p == 2) ? (v + N - S2) % N : (v + N - 1) % N;
          p_hops[tag]++;
          port_hops[p]++;
          if ((p < 2 && t < v) || (p >= 2 && t > v)) origin_cross++;
        end
      end
      if (inj_valid[v] && !inj_ready[v]) inj_stalls++;
      if (ej_valid[v] && !ej_ready[v]) ej_stalls++;
      if (ej_valid[v] && ej_ready[v]) begin
        int tag;
        tag = int'(ej_flit[v][15:0]);
        if (tag >= n_pkts || !p_live[tag]) check(1'b0, $sformatf("node %0d: stray tag %0d", v, tag));
        else begin
          check(p_dst[tag] == v, $sformatf("tag %0d at node %0d, dst %0d", tag, v, p_dst[tag]));
          check(p_hops[tag] == p_exp[tag],
                $sformatf("tag %0d %0d->%0d hops %0d expected %0d", tag, p_src[tag], p_dst[tag], p_hops[tag], p_exp[tag]));
          check(int'(cyc) - p_t0[tag] >= 2 * (p_hops[tag] + 1), $sformatf("tag %0d too fast", tag));
          if (p_exp[tag] > bfs_dist(N, S2, p_dst[tag] - p_src[tag])) longer_routes++;
          p_live[tag] = 1'b0;
          delivered++;
        end
      end
    end
  end

  // Registers a packet; returns its tag.
  function automatic int new_pkt(int s, int d, int extra);
    int tag;
    tag = n_pkts;
    n_pkts++;
    p_src[tag] = s; p_dst[tag] = d; p_hops[tag] = 0; p_live[tag] = 1'b1;
    p_exp[tag] = ref_hops(s, d) + extra;
    return tag;
  endfunction

  int sent_by [N];

  initial begin
    done = 1'b0; checks = 0; failures = 0; delivered = 0;
    port_hops = '{default: 0};
    inj_stalls = 0; ej_stalls = 0; longer_routes = 0; origin_cross = 0; table_writes = 0;
    cfg_we = '0; cfg_addr = '0; cfg_data = '0;
    inj_valid = '0; inj_flit = '0; ej_ready = '1;
    @(posedge rst_n);
    repeat (2) @(negedge clk);

    // 1. Lone packet.
    begin
      int tag, t_acc;
      tag = new_pkt(0, N / 2, 0);
      inj_valid[0] = 1'b1;
      inj_flit[0]  = make_flit(0, N / 2, tag);
      p_t0[tag] = int'(cyc) + 1;   // number of the coming edge
      t_acc = int'(cyc) + 1;
      @(negedge clk);
      inj_valid[0] = 1'b0;
      while (p_live[tag]) @(negedge clk);
      check(int'(cyc) - t_acc == 2 * (p_exp[tag] + 1),
            $sformatf("lone packet latency %0d, hops %0d", int'(cyc) - t_acc, p_exp[tag]));
    end

    // 2. Random traffic.
    for (int v = 0; v < N; v++) sent_by[v] = 0;
    for (int c = 0; c < PKTS * 40 || inj_valid != '0; c++) begin
      logic [N-1:0] taken;
      #4 taken = inj_valid & inj_ready;
      @(negedge clk);
      for (int v = 0; v < N; v++) begin
        if (taken[v]) inj_valid[v] = 1'b0;
        if (!inj_valid[v] && sent_by[v] < PKTS && ($urandom % 12) == 0) begin
          int d, tag;
          d = (v + 1 + $urandom % (N - 1)) % N;
          tag = new_pkt(v, d, 0);
          p_t0[tag] = int'(cyc) + 1;
          inj_valid[v] = 1'b1;
          inj_flit[v]  = make_flit(v, d, tag);
          sent_by[v]++;
        end
        ej_ready[v] = ($urandom % 4) != 0;
      end
    end
    ej_ready = '1;
    repeat (20 * N) @(negedge clk);

    // 2b. Hot spot: node N-1 stops accepting while every other node sends it
    //     HOT packets back to back, so the buffers on the way fill up and
    //     injections stall; then it accepts again and everything drains.
    ej_ready[N-1] = 1'b0;
    for (int v = 0; v < N; v++) sent_by[v] = 0;
    for (int c = 0; c < 40 * HOT || inj_valid != '0; c++) begin
      logic [N-1:0] taken;
      #4 taken = inj_valid & inj_ready;
      @(negedge clk);
      if (c == 30 * HOT) ej_ready[N-1] = 1'b1;
      for (int v = 0; v < N - 1; v++) begin
        if (taken[v]) inj_valid[v] = 1'b0;
        if (!inj_valid[v] && sent_by[v] < HOT) begin
          int tag;
          tag = new_pkt(v, N - 1, 0);
          p_t0[tag] = int'(cyc) + 1;
          inj_valid[v] = 1'b1;
          inj_flit[v]  = make_flit(v, N - 1, tag);
          sent_by[v]++;
        end
      end
    end
    repeat (20 * N) @(negedge clk);
    check(delivered == n_pkts, $sformatf("delivered %0d of %0d", delivered, n_pkts));

    // 3. Table rewrite: node 0 sends packets for N/2 over a port that does
    //    not start a shortest path.
    if (ALG == rc_pkg::ALG_TABLE) begin
      int bad, dd, tag, nb;
      dd = bfs_dist(N, S2, N / 2);
      bad = -1;
      for (int p = 3; p >= 0; p--) begin
        nb = (p == 0) ? 1 : (p == 1) ? S2 : (p == 2) ? N - S2 : N - 1;
        if (bfs_dist(N, S2, N / 2 - nb) == dd) bad = p;
      end
      check(bad >= 0, "no detour port found");
      cfg_we[0] = 1'b1; cfg_addr = NW'(N / 2); cfg_data = CW'(bad);
      @(negedge clk);
      cfg_we = '0;
      table_writes++;
      tag = new_pkt(0, N / 2, 1);
      p_t0[tag] = int'(cyc) + 1;
      inj_valid[0] = 1'b1;
      inj_flit[0]  = make_flit(0, N / 2, tag);
      @(negedge clk);
      inj_valid[0] = 1'b0;
      repeat (10 * N) @(negedge clk);
      check(!p_live[tag], "rewritten route not delivered");
    end

    done = 1'b1;
  end

endmodule
