// rc_router: simplified packet router for a ring circulant C(N; 1, s2).
//
// Five ports: network ports 0..3 (to v+1, v+s2, v-s2, v-1) and the local
// port 4 towards the IP node. Packets are single flits {address field, data};
// the address field is the destination number (table and adaptive routing)
// or the remaining clockwise distance (clockwise routing). The routing
// algorithm is chosen by the ALG parameter and implemented by one routing
// unit per router, as a separate module, so the rest of the router does not
// depend on it.
//
// Datapath: every input has a FIFO_DEPTH-entry FIFO. Each cycle a
// round-robin pointer picks one non-empty input; its head flit goes through
// the routing unit, which gives the output (a network port, or the local
// port when the packet has arrived) and the rewritten address field. If that
// output's register is free (empty, or being read this cycle) the flit moves
// into it and is popped from its FIFO. At most one flit is switched per
// cycle. The pointer moves past the chosen input every cycle, so a blocked
// head does not hold the router.
//
// Links use valid/ready: a flit moves when both are high; an output holds
// its flit stable until it is taken. in_ready is "FIFO not full".
// Timing: a flit accepted at an input reaches the output register no
// earlier than two clock edges later (FIFO write, then switch), i.e. a hop
// costs at least 2 cycles.
//
// The paper states only that its experiments used a simplified router from
// an existing library and treats the routing unit as an exchangeable module;
// the buffer depth, the single-flit packets, the one-flit-per-cycle switch
// and the round-robin choice are this design's own. There is no deadlock
// avoidance (no virtual channels); with finite buffers a cycle of full
// buffers can block under heavy load.
module rc_router
  import rc_pkg::*;
#(
  parameter int unsigned  N          = 100,
  parameter int unsigned  S2         = 44,
  parameter int unsigned  ID         = 0,
  parameter routing_alg_e ALG        = ALG_ADAPTIVE,
  parameter int unsigned  DATA_W     = 32,
  parameter int unsigned  FIFO_DEPTH = 4,
  parameter int unsigned  NODE_W     = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned  CNT_W      = $clog2(N + 1),
  parameter int unsigned  FLIT_W     = NODE_W + DATA_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // routing unit configuration
  input  logic                            cfg_we,
  input  logic [NODE_W-1:0]               cfg_addr,
  input  logic [CNT_W-1:0]                cfg_data,
  // inputs: 0..3 network, 4 local
  input  logic [ALL_PORTS-1:0]             in_valid,
  output logic [ALL_PORTS-1:0]             in_ready,
  input  logic [ALL_PORTS-1:0][FLIT_W-1:0] in_flit,
  // outputs: 0..3 network, 4 local
  output logic [ALL_PORTS-1:0]             out_valid,
  input  logic [ALL_PORTS-1:0]             out_ready,
  output logic [ALL_PORTS-1:0][FLIT_W-1:0] out_flit
);

  logic [ALL_PORTS-1:0]             f_empty, f_full, f_pop;
  logic [ALL_PORTS-1:0][FLIT_W-1:0] f_head;

  for (genvar i = 0; i < ALL_PORTS; i++) begin : g_in
    rc_fifo #(.WIDTH(FLIT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .push  (in_valid[i]),
      .wdata (in_flit[i]),
      .pop   (f_pop[i]),
      .rdata (f_head[i]),
      .empty (f_empty[i]),
      .full  (f_full[i])
    );
    assign in_ready[i] = !f_full[i];
  end

  // Round-robin choice of one non-empty input.
  logic [SEL_W-1:0] rr, sel;
  logic             any;

  always_comb begin
    sel = rr;
    any = 1'b0;
    for (int k = ALL_PORTS - 1; k >= 0; k--) begin
      int unsigned idx;
      idx = (int'(rr) + k) % ALL_PORTS;
      if (!f_empty[idx]) begin
        sel = SEL_W'(idx);
        any = 1'b1;
      end
    end
  end

  // Routing unit.
  logic [FLIT_W-1:0] head;
  logic [NODE_W-1:0] r_addr_in, r_addr_out;
  logic              r_local;
  logic [PORT_W-1:0] r_port;

  assign head      = f_head[sel];
  assign r_addr_in = head[FLIT_W-1 -: NODE_W];

  if (ALG == ALG_TABLE) begin : g_table
    table_routing #(.N(N), .S2(S2), .ID(ID), .NODE_W(NODE_W), .CNT_W(CNT_W)) u_route (
      .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
      .addr_in (r_addr_in), .is_local (r_local), .out_port (r_port), .addr_out (r_addr_out)
    );
  end else if (ALG == ALG_CLOCKWISE) begin : g_clockwise
    clockwise_routing #(.N(N), .S2(S2), .NODE_W(NODE_W), .CNT_W(CNT_W)) u_route (
      .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
      .addr_in (r_addr_in), .is_local (r_local), .out_port (r_port), .addr_out (r_addr_out)
    );
  end else begin : g_adaptive
    logic [NODE_W-1:0] next_node;
    adaptive_routing #(.N(N), .S2(S2), .ID(ID), .NODE_W(NODE_W), .CNT_W(CNT_W)) u_route (
      .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
      .addr_in (r_addr_in), .is_local (r_local), .out_port (r_port), .addr_out (r_addr_out),
      .next_node (next_node)
    );
  end

  logic [SEL_W-1:0]     dest;
  logic [ALL_PORTS-1:0] o_free;
  logic                 go;

  always_comb begin
    dest   = r_local ? P_LOCAL : SEL_W'(r_port);
    o_free = ~out_valid | out_ready;
    go     = any && o_free[dest];
    f_pop  = '0;
    if (go) f_pop[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr        <= '0;
      out_valid <= '0;
      out_flit  <= '0;
    end else begin
      if (any) rr <= (sel == SEL_W'(ALL_PORTS - 1)) ? '0 : sel + 1'b1;
      for (int o = 0; o < ALL_PORTS; o++) begin
        if (out_valid[o] && out_ready[o]) out_valid[o] <= 1'b0;
      end
      if (go) begin
        out_valid[dest] <= 1'b1;
        out_flit[dest]  <= {r_addr_out, head[DATA_W-1:0]};
      end
    end
  end

  // An offered flit stays offered, unchanged, until it is taken.
  for (genvar o = 0; o < ALL_PORTS; o++) begin : g_hold
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid[o] && !out_ready[o] |=> out_valid[o] && $stable(out_flit[o]));
  end

endmodule
