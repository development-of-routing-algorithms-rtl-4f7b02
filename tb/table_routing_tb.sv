// table_routing_tb: self-checking test of the table routing unit.
//  1. Eight units form the network C(8; 1, 3). Each row is compared with the
//     printed routing table of that circulant (with ports 2 and 3 exchanged,
//     see below) and every non-local entry must start a shortest path
//     (breadth-first search reference).
//  2. A unit at the default size C(100; 1, 44): every entry must start a
//     shortest path; the own node must be reported as local.
//  3. Table writes through cfg_*: a rewritten entry is read back next cycle
//     and reset restores the precomputed row.
// The printed table numbers the -1 port 2 and the -s2 port 3, while the
// router figure and the text ("sent via the 0th port and received via the
// 3rd port") number them the other way; the RTL follows the figure, so the
// printed values 2 and 3 are exchanged before the comparison.
module table_routing_tb;
  import tb_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // Printed table for C(8;1,3); -1 marks the diagonal.
  int t2 [8][8] = '{
    '{-1, 0, 0, 1, 0, 3, 0, 2},
    '{ 2,-1, 0, 0, 1, 0, 3, 0},
    '{ 0, 2,-1, 0, 0, 1, 0, 3},
    '{ 3, 0, 2,-1, 0, 0, 1, 0},
    '{ 0, 3, 0, 2,-1, 0, 0, 1},
    '{ 1, 0, 3, 0, 2,-1, 0, 0},
    '{ 0, 1, 0, 3, 0, 2,-1, 0},
    '{ 0, 0, 1, 0, 3, 0, 2,-1}
  };

  logic [2:0] a8;
  logic [7:0] loc8;
  logic [7:0][1:0] port8;

  for (genvar r = 0; r < 8; r++) begin : g8
    logic [2:0] ao;
    table_routing #(.N(8), .S2(3), .ID(r)) u (
      .clk, .rst_n, .cfg_we (1'b0), .cfg_addr ('0), .cfg_data ('0),
      .addr_in (a8), .is_local (loc8[r]), .out_port (port8[r]), .addr_out (ao)
    );
  end

  logic       we;
  logic [6:0] caddr, a100, ao100;
  logic [6:0] cdata;
  logic       loc100;
  logic [1:0] port100;

  table_routing #(.N(100), .S2(44), .ID(17)) u100 (
    .clk, .rst_n, .cfg_we (we), .cfg_addr (caddr), .cfg_data (cdata),
    .addr_in (a100), .is_local (loc100), .out_port (port100), .addr_out (ao100)
  );

  function automatic int swap23(int p);
    return (p == 2) ? 3 : (p == 3) ? 2 : p;
  endfunction

  function automatic int nb(int v, int p, int n, int s2);
    case (p)
      0: return (v + 1) % n;
      1: return (v + s2) % n;
      2: return (v + n - s2) % n;
      default: return (v + n - 1) % n;
    endcase
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; caddr = 0; cdata = 0; a8 = 0; a100 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    // 1. C(8;1,3) against the printed table and against BFS.
    for (int d = 0; d < 8; d++) begin
      a8 = 3'(d);
      #1;
      for (int r = 0; r < 8; r++) begin
        if (r == d) check(loc8[r] == 1'b1, $sformatf("C8 row %0d own not local", r));
        else begin
          int p, dn, dd;
          p  = int'(port8[r]);
          check(loc8[r] == 1'b0, $sformatf("C8 row %0d dst %0d local", r, d));
          check(p == swap23(t2[r][d]),
                $sformatf("C8 row %0d dst %0d port %0d, table %0d", r, d, p, t2[r][d]));
          dn = bfs_dist(8, 3, d - nb(r, p, 8, 3));
          dd = bfs_dist(8, 3, d - r);
          check(dn + 1 == dd, $sformatf("C8 row %0d dst %0d not shortest", r, d));
        end
      end
    end

    // 2. Default size, node 17.
    for (int d = 0; d < 100; d++) begin
      a100 = 7'(d);
      #1;
      if (d == 17) check(loc100 == 1'b1, "C100 own not local");
      else begin
        int dn, dd;
        dn = bfs_dist(100, 44, d - nb(17, int'(port100), 100, 44));
        dd = bfs_dist(100, 44, d - 17);
        check(loc100 == 1'b0 && dn + 1 == dd,
              $sformatf("C100 dst %0d port %0d not shortest", d, port100));
      end
      check(ao100 == a100, "address field changed");
    end

    // 3. Rewrite entry 40 and 41, read back, then reset.
    @(negedge clk);
    we = 1; caddr = 7'd40; cdata = 7'd3;
    @(negedge clk);
    caddr = 7'd41; cdata = 7'd2;
    @(negedge clk);
    we = 0;
    a100 = 7'd40; #1 check(port100 == 2'd3, "written entry 40");
    a100 = 7'd41; #1 check(port100 == 2'd2, "written entry 41");
    rst_n = 1'b0;
    #2 rst_n = 1'b1;
    a100 = 7'd40; #1;
    begin
      int dn, dd;
      dn = bfs_dist(100, 44, 40 - nb(17, int'(port100), 100, 44));
      dd = bfs_dist(100, 44, 40 - 17);
      check(dn + 1 == dd, "reset restores entry 40");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
