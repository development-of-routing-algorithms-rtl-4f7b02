// clockwise_routing_tb: self-checking test of the clockwise routing unit.
// For C(100; 1, 44) (default) and, after rewriting the N and s2 registers,
// C(8; 1, 3) and C(64; 1, 7):
//  * every address value S = (dst - cur) mod N is applied; the port and the
//    rewritten address must match one step of the reference
//    Find_Route_Clockwise procedure (next node and next distance);
//  * a packet is walked hop by hop from S to arrival; the walk must end
//    (at most N hops) and its length equal the reference walk.
// The efficiency K = sum(hops) / sum(shortest hops) over all destinations
// is printed for each circulant; it must be >= 1.
module clockwise_routing_tb;
  import tb_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic       we;
  logic [6:0] caddr, a_in, a_out;
  logic [6:0] cdata;
  logic       loc;
  logic [1:0] port;

  clockwise_routing dut (
    .clk, .rst_n, .cfg_we (we), .cfg_addr (caddr), .cfg_data (cdata),
    .addr_in (a_in), .is_local (loc), .out_port (port), .addr_out (a_out)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic set_cfg(int n, int s2);
    @(negedge clk);
    we = 1; caddr = 7'd0; cdata = 7'(n);
    @(negedge clk);
    caddr = 7'd1; cdata = 7'(s2);
    @(negedge clk);
    we = 0;
  endtask

  task automatic sweep(int n, int s2);
    int sum_a, sum_d;
    sum_a = 0; sum_d = 0;
    for (int s = 0; s < n; s++) begin
      int nxt, hops, cur, ref_hops, rnode;
      a_in = 7'(s);
      #1;
      if (s == 0) check(loc, "S=0 not local");
      else begin
        nxt = clockwise_next(0, s, n, s2);
        check(!loc && exp_port(0, nxt, n, s2) == int'(port),
              $sformatf("C(%0d;1,%0d) S=%0d port %0d", n, s2, s, port));
        check(int'(a_out) == ((s - nxt) % n + n) % n,
              $sformatf("C(%0d;1,%0d) S=%0d addr_out %0d", n, s2, s, a_out));
      end
      // Walk of the RTL.
      hops = 0;
      cur = s;
      while (hops <= n) begin
        a_in = 7'(cur);
        #1;
        if (loc) break;
        cur = int'(a_out);
        hops++;
      end
      // Walk of the reference, from node 0 to node s.
      ref_hops = 0;
      rnode = 0;
      while (rnode != s && ref_hops <= n) begin
        rnode = clockwise_next(rnode, s, n, s2);
        ref_hops++;
      end
      check(hops == ref_hops, $sformatf("C(%0d;1,%0d) S=%0d walk %0d ref %0d", n, s2, s, hops, ref_hops));
      sum_a += hops;
      sum_d += bfs_dist(n, s2, s);
    end
    check(sum_a >= sum_d, "efficiency below 1");
    $display("C(%0d;1,%0d): clockwise hops %0d, shortest hops %0d, K = %0.3f",
             n, s2, sum_a, sum_d, real'(sum_a) / real'(sum_d));
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; caddr = 0; cdata = 0; a_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    sweep(100, 44);
    set_cfg(8, 3);
    sweep(8, 3);
    set_cfg(64, 7);
    sweep(64, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
