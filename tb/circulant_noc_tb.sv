// circulant_noc_tb: end-to-end test of the network with each of the three
// routing algorithms, one noc_harness per algorithm: table and adaptive routing
// on C(9; 1, 3), clockwise routing on C(16; 1, 6), where it is not optimal. Every
// mechanism of the design has to occur at least once: hops over all four
// port kinds under each algorithm, stalled injections and ejections
// (backpressure), clockwise routes longer than the shortest ones, adaptive
// routes that cross the numbering origin, and a routing-table rewrite.
module circulant_noc_tb;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NA = 3;
  logic [NA-1:0] done;
  int chk [NA], fl [NA], dlv [NA], ph [NA][4], is_ [NA], es [NA], lr [NA], oc [NA], tw [NA];

  noc_harness #(.N(9), .S2(3), .ALG(rc_pkg::ALG_TABLE), .PKTS(20)) h_table (
    .clk, .rst_n, .done (done[0]), .checks (chk[0]), .failures (fl[0]), .delivered (dlv[0]),
    .port_hops (ph[0]), .inj_stalls (is_[0]), .ej_stalls (es[0]), .longer_routes (lr[0]),
    .origin_cross (oc[0]), .table_writes (tw[0]));
  noc_harness #(.N(16), .S2(6), .ALG(rc_pkg::ALG_CLOCKWISE), .PKTS(20)) h_clockwise (
    .clk, .rst_n, .done (done[1]), .checks (chk[1]), .failures (fl[1]), .delivered (dlv[1]),
    .port_hops (ph[1]), .inj_stalls (is_[1]), .ej_stalls (es[1]), .longer_routes (lr[1]),
    .origin_cross (oc[1]), .table_writes (tw[1]));
  noc_harness #(.N(9), .S2(3), .ALG(rc_pkg::ALG_ADAPTIVE), .PKTS(20)) h_adaptive (
    .clk, .rst_n, .done (done[2]), .checks (chk[2]), .failures (fl[2]), .delivered (dlv[2]),
    .port_hops (ph[2]), .inj_stalls (is_[2]), .ej_stalls (es[2]), .longer_routes (lr[2]),
    .origin_cross (oc[2]), .table_writes (tw[2]));

  int checks = 0, failures = 0;

  task automatic need(int count, string what);
    checks++;
    $display("  %-40s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL: mechanism never occurred: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: done = %b", done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string names [NA] = '{"table", "clockwise", "adaptive"};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done == '1);
    @(posedge clk);
    for (int a = 0; a < NA; a++) begin
      $display("%s routing: %0d packets delivered", names[a], dlv[a]);
      checks += chk[a];
      failures += fl[a];
      need(dlv[a], {names[a], ": packets delivered"});
      for (int p = 0; p < 4; p++) need(ph[a][p], $sformatf("%s: hops over port %0d", names[a], p));
      need(is_[a], {names[a], ": stalled injections"});
      need(es[a], {names[a], ": stalled ejections"});
    end
    need(lr[1], "clockwise: routes longer than shortest");
    need(oc[2], "adaptive: routes crossing the origin");
    need(tw[0], "table: routing-table rewrites");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
