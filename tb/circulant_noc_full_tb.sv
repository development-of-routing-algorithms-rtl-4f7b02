// circulant_noc_full_tb: the network at its default configuration,
// C(100; 1, 44) with adaptive routing, end to end.
//  1. The example route of that circulant, node 1 to node 38, must follow
//     1-57-13-69-25-81-37-38 link by link and be ejected at node 38 after
//     2*(7+1) clock edges.
//  2. Every node sends PKTS packets to random destinations. Each must arrive
//     at its destination with its data, over a shortest route (hop count
//     equal to the breadth-first-search distance), so the efficiency
//     K = sum(hops) / sum(shortest hops), printed at the end, must be 1.
module circulant_noc_full_tb;
  import tb_ref_pkg::*;

  localparam int N = 100, S2 = 44, NW = 7, CW = 7, DW = 32, FW = NW + DW;
  localparam int PKTS = 4;
  localparam int MAXP = N * PKTS + 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [N-1:0]          cfg_we;
  logic [NW-1:0]         cfg_addr;
  logic [CW-1:0]         cfg_data;
  logic [N-1:0]          inj_valid, inj_ready, ej_valid, ej_ready;
  logic [N-1:0][FW-1:0]  inj_flit, ej_flit;

  circulant_noc dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .inj_valid, .inj_ready, .inj_flit, .ej_valid, .ej_ready, .ej_flit
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int p_src [MAXP], p_dst [MAXP], p_hops [MAXP], p_t0 [MAXP], p_t1 [MAXP];
  bit p_live [MAXP];
  int n_pkts = 0, delivered = 0;
  int path [$];
  longint cyc = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int v = 0; v < N; v++) begin
      for (int p = 0; p < 4; p++) begin
        if (dut.r_out_valid[v][p] && dut.r_out_ready[v][p]) begin
          int tag;
          tag = int'(dut.r_out_flit[v][p][15:0]);
          p_hops[tag]++;
          if (tag == 0) path.push_back(port_dest(v, p));
        end
      end
      if (ej_valid[v] && ej_ready[v]) begin
        int tag;
        tag = int'(ej_flit[v][15:0]);
        if (tag >= n_pkts || !p_live[tag]) check(1'b0, $sformatf("node %0d: stray tag %0d", v, tag));
        else begin
          check(p_dst[tag] == v && ej_flit[v][DW-1:16] == 16'hC1C1,
                $sformatf("tag %0d at node %0d, dst %0d", tag, v, p_dst[tag]));
          p_t1[tag] = int'(cyc);
          p_live[tag] = 1'b0;
          delivered++;
        end
      end
    end
  end

  function automatic int port_dest(int v, int p);
    return (p == 0) ? (v + 1) % N : (p == 1) ? (v + S2) % N :
           (p == 2) ? (v + N - S2) % N : (v + N - 1) % N;
  endfunction

  function automatic int new_pkt(int s, int d);
    int tag;
    tag = n_pkts;
    n_pkts++;
    p_src[tag] = s; p_dst[tag] = d; p_hops[tag] = 0; p_live[tag] = 1'b1;
    p_t0[tag] = int'(cyc) + 1;
    return tag;
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int route [7] = '{57, 13, 69, 25, 81, 37, 38};
  int sent_by [N];

  initial begin
    int sum_a, sum_d;
    cfg_we = '0; cfg_addr = '0; cfg_data = '0;
    inj_valid = '0; inj_flit = '0; ej_ready = '1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    // 1. Example route 1 -> 38.
    begin
      int tag;
      tag = new_pkt(1, 38);
      inj_valid[1] = 1'b1;
      inj_flit[1]  = {NW'(38), 16'hC1C1, 16'(tag)};
      @(negedge clk);
      inj_valid[1] = 1'b0;
      repeat (40) @(negedge clk);
      check(!p_live[tag], "example packet not delivered");
      check(path.size() == 7, $sformatf("example route has %0d hops", path.size()));
      for (int h = 0; h < 7 && h < path.size(); h++)
        check(path[h] == route[h], $sformatf("example hop %0d reached %0d, expected %0d", h, path[h], route[h]));
      check(p_t1[tag] - p_t0[tag] == 2 * (7 + 1),
            $sformatf("example latency %0d edges", p_t1[tag] - p_t0[tag]));
    end

    // 2. Random traffic from every node.
    for (int v = 0; v < N; v++) sent_by[v] = 0;
    for (int c = 0; c < PKTS * 30 || inj_valid != '0; c++) begin
      logic [N-1:0] taken;
      #4 taken = inj_valid & inj_ready;
      @(negedge clk);
      for (int v = 0; v < N; v++) begin
        if (taken[v]) inj_valid[v] = 1'b0;
        if (!inj_valid[v] && sent_by[v] < PKTS && ($urandom % 8) == 0) begin
          int d, tag;
          d = (v + 1 + $urandom % (N - 1)) % N;
          tag = new_pkt(v, d);
          inj_valid[v] = 1'b1;
          inj_flit[v]  = {NW'(d), 16'hC1C1, 16'(tag)};
          sent_by[v]++;
        end
      end
    end
    repeat (300) @(negedge clk);
    check(delivered == n_pkts, $sformatf("delivered %0d of %0d", delivered, n_pkts));
    sum_a = 0; sum_d = 0;
    for (int t = 1; t < n_pkts; t++) begin
      int dd;
      dd = bfs_dist(N, S2, p_dst[t] - p_src[t]);
      check(p_hops[t] == dd, $sformatf("tag %0d %0d->%0d hops %0d shortest %0d", t, p_src[t], p_dst[t], p_hops[t], dd));
      sum_a += p_hops[t];
      sum_d += dd;
    end
    $display("C(100;1,44) adaptive: %0d packets, hops %0d, shortest %0d, K = %0.3f",
             n_pkts, sum_a, sum_d, real'(sum_a) / real'(sum_d));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
