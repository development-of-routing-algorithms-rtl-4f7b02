// adaptive_routing_tb: self-checking test of the adaptive routing unit.
//  * The example route of C(100; 1, 44) from node 1 to node 38,
//    1-57-13-69-25-81-37-38, is followed hop by hop by rewriting the unit's
//    own-node register at each node.
//  * For every source/destination pair of C(100; 1, 44) the chosen port must
//    match the reference Step_Cycles model and lead to a neighbour one hop
//    closer to the destination (shortest routes, efficiency 1).
//  * After rewriting N and s2, C(9; 1, 2), C(49; 1, 6) and C(144; 1, 17) are
//    swept against the reference model, and the shortest-path property is
//    counted as well.
module adaptive_routing_tb;
  import tb_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic       we;
  logic [6:0] caddr;
  logic [7:0] a_in, a_out, nxt;
  logic [7:0] cdata;
  logic       loc;
  logic [1:0] port;

  // Sized for up to 144 nodes; reset values are C(100; 1, 44), node 0.
  adaptive_routing #(.N(100), .S2(44), .ID(0), .NODE_W(8), .CNT_W(8)) dut (
    .clk, .rst_n, .cfg_we (we), .cfg_addr ({1'b0, caddr}), .cfg_data (cdata),
    .addr_in (a_in), .is_local (loc), .out_port (port),
    .addr_out (), .next_node ()
  );
  assign nxt = dut.next_node;
  assign a_out = dut.addr_out;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic wr(int a, int v);
    @(negedge clk);
    we = 1; caddr = 7'(a); cdata = 8'(v);
    @(negedge clk);
    we = 0;
  endtask

  task automatic sweep(int n, int s2, bit need_shortest);
    int notshort;
    notshort = 0;
    wr(0, n);
    wr(1, s2);
    for (int src = 0; src < n; src++) begin
      wr(2, src);
      for (int dst = 0; dst < n; dst++) begin
        a_in = 8'(dst);
        #1;
        if (dst == src) check(loc, "own node not local");
        else begin
          int rn;
          rn = adaptive_next(src, dst, n, s2);
          check(!loc && int'(port) == exp_port(src, rn, n, s2) && int'(nxt) == rn,
                $sformatf("C(%0d;1,%0d) %0d->%0d port %0d next %0d ref %0d",
                          n, s2, src, dst, port, nxt, rn));
          if (bfs_dist(n, s2, dst - int'(nxt)) + 1 != bfs_dist(n, s2, dst - src)) notshort++;
        end
      end
    end
    if (need_shortest) check(notshort == 0, $sformatf("C(%0d;1,%0d): %0d non-shortest steps", n, s2, notshort));
    $display("C(%0d;1,%0d): %0d of %0d steps not on a shortest path", n, s2, notshort, n * (n - 1));
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int route [8] = '{1, 57, 13, 69, 25, 81, 37, 38};

  initial begin
    we = 0; caddr = 0; cdata = 0; a_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    // Example route, paper numbering 1..100 equals 0-based numbering mod 100.
    a_in = 8'd38;
    for (int h = 0; h < 7; h++) begin
      wr(2, route[h]);
      #1;
      check(!loc && int'(nxt) == route[h + 1],
            $sformatf("route hop %0d: %0d -> %0d, expected %0d", h, route[h], nxt, route[h + 1]));
    end
    wr(2, 38);
    #1 check(loc, "route end not local");
    check(a_out == 8'd38, "address field changed");
    sweep(100, 44, 1'b1);
    sweep(9, 2, 1'b0);
    sweep(49, 6, 1'b0);
    sweep(144, 17, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
