// rc_router_tb: self-checking test of one router.
//  * Router 2 of C(8; 1, 3) with table routing: random single-flit packets
//    enter on all five inputs with random gaps, the outputs see random
//    backpressure. Every flit must leave exactly once, on the output given
//    by the reference (the neighbour one hop closer to the destination, the
//    lowest such port; the local port when the destination is node 2), with
//    its data unchanged. Output flits must stay stable while not taken.
//  * Latency: a flit into an idle router is offered at its output two clock
//    edges after it was accepted.
//  * Router 5 of C(8; 1, 3) with clockwise routing: the address field is the
//    clockwise distance and must leave rewritten by one reference step.
module rc_router_tb;
  import tb_ref_pkg::*;

  localparam int N = 8, S2 = 3, ID = 2, DW = 16, FW = 3 + DW;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [4:0]         in_valid, in_ready, out_valid, out_ready;
  logic [4:0][FW-1:0] in_flit, out_flit;

  rc_router #(.N(N), .S2(S2), .ID(ID), .ALG(rc_pkg::ALG_TABLE), .DATA_W(DW)) dut (
    .clk, .rst_n, .cfg_we (1'b0), .cfg_addr ('0), .cfg_data ('0),
    .in_valid, .in_ready, .in_flit, .out_valid, .out_ready, .out_flit
  );

  logic [4:0]         c_in_valid, c_in_ready, c_out_valid;
  logic [4:0][FW-1:0] c_in_flit, c_out_flit;

  rc_router #(.N(N), .S2(S2), .ID(5), .ALG(rc_pkg::ALG_CLOCKWISE), .DATA_W(DW)) dut_cw (
    .clk, .rst_n, .cfg_we (1'b0), .cfg_addr ('0), .cfg_data ('0),
    .in_valid (c_in_valid), .in_ready (c_in_ready), .in_flit (c_in_flit),
    .out_valid (c_out_valid), .out_ready (5'b11111), .out_flit (c_out_flit)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Expected output of a flit for destination d at node ID.
  function automatic int ref_port(int d);
    int dd;
    if (d == ID) return 4;
    dd = bfs_dist(N, S2, d - ID);
    for (int p = 0; p < 4; p++) begin
      int nb;
      nb = (p == 0) ? (ID + 1) % N : (p == 1) ? (ID + S2) % N :
           (p == 2) ? (ID + N - S2) % N : (ID + N - 1) % N;
      if (bfs_dist(N, S2, d - nb) + 1 == dd) return p;
    end
    return -1;
  endfunction

  int exp_port_of [int];      // keyed by the 16-bit tag in the data field
  int sent = 0, recv = 0, stalls = 0;
  int per_port [5] = '{default: 0};
  logic [4:0][FW-1:0] prev_flit;
  logic [4:0]         prev_stall;

  // Output monitor.
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) begin
      if (prev_stall[o]) check(out_valid[o] && out_flit[o] == prev_flit[o], "output not held");
      if (out_valid[o] && out_ready[o]) begin
        int tag;
        tag = int'(out_flit[o][DW-1:0]);
        if (!exp_port_of.exists(tag)) check(1'b0, $sformatf("unknown tag %0d", tag));
        else begin
          check(exp_port_of[tag] == o, $sformatf("tag %0d on port %0d, expected %0d", tag, o, exp_port_of[tag]));
          exp_port_of.delete(tag);
        end
        recv++;
        per_port[o]++;
      end
      if (out_valid[o] && !out_ready[o]) stalls++;
      prev_stall[o] = out_valid[o] && !out_ready[o];
      prev_flit[o]  = out_flit[o];
    end
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int next_tag = 1;

  initial begin
    in_valid = '0; in_flit = '0; out_ready = '1; prev_stall = '0;
    c_in_valid = '0; c_in_flit = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // Latency of one flit through the idle router: to node 7 (port 0 ... any).
    in_valid[4] = 1'b1;
    in_flit[4]  = {3'd3, 16'(next_tag)};
    exp_port_of[next_tag] = ref_port(3);
    next_tag++; sent++;
    @(posedge clk);   // accepted at this edge
    @(negedge clk);
    in_valid = '0;
    check(out_valid == '0, "offered after one edge");
    @(posedge clk);
    #1 check(out_valid[ref_port(3)], "not offered after two edges");
    repeat (3) @(negedge clk);

    // Random traffic with backpressure.
    for (int cyc = 0; cyc < 3000; cyc++) begin
      logic [4:0] taken;
      #4 taken = in_valid & in_ready;   // handshakes of the coming edge
      @(negedge clk);
      for (int i = 0; i < 5; i++) begin
        if (!in_valid[i] || taken[i]) begin
          in_valid[i] = 1'b0;
          if (cyc < 2500 && ($urandom % 3) == 0) begin
            int d;
            d = $urandom % N;
            in_valid[i] = 1'b1;
            in_flit[i]  = {3'(d), 16'(next_tag)};
            exp_port_of[next_tag] = ref_port(d);
            next_tag++; sent++;
          end
        end
      end
      out_ready = 5'($urandom);
    end
    @(negedge clk);
    in_valid = '0;
    out_ready = '1;
    repeat (50) @(negedge clk);
    check(recv == sent, $sformatf("sent %0d received %0d", sent, recv));
    check(exp_port_of.num() == 0, "flits lost");
    check(stalls > 0, "no backpressure stall seen");
    for (int o = 0; o < 5; o++) check(per_port[o] > 0, $sformatf("port %0d never used", o));

    // Clockwise router: every distance value on the local input.
    for (int s = 0; s < N; s++) begin
      int nxt, ep;
      @(negedge clk);
      c_in_valid[4] = 1'b1;
      c_in_flit[4]  = {3'(s), 16'hABCD};
      @(negedge clk);
      c_in_valid[4] = 1'b0;
      @(posedge clk);
      #1;
      nxt = clockwise_next(5, (5 + s) % N, N, S2);
      ep  = (s == 0) ? 4 : exp_port(5, nxt, N, S2);
      check(c_out_valid[ep] && c_out_flit[ep][DW-1:0] == 16'hABCD,
            $sformatf("clockwise S=%0d not on port %0d", s, ep));
      if (s != 0)
        check(int'(c_out_flit[ep][FW-1 -: 3]) == (((5 + s) % N) - nxt + N) % N,
              $sformatf("clockwise S=%0d address %0d", s, c_out_flit[ep][FW-1 -: 3]));
    end

    $display("router: sent %0d received %0d, stall cycles %0d", sent, recv, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
