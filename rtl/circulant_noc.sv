// circulant_noc: network-on-chip communication subsystem on the ring
// circulant topology C(N; 1, S2).
//
// N routers (rc_router), all using the routing algorithm ALG, are wired as the
// circulant: router v's port p drives the neighbour port_target(v, p) and
// arrives there on port 3-p (port 0 = +1, 1 = +S2, 2 = -S2, 3 = -1). Every
// node thus has degree 4 and the network has 2N bidirectional links. The
// local port of each router is brought out for the IP node attached to it
// (processor, memory, I/O; not part of this design).
//
// Interface, per node v:
//   inj_valid[v] / inj_ready[v] / inj_flit[v]  : IP -> network
//   ej_valid[v]  / ej_ready[v]  / ej_flit[v]   : network -> IP
//   cfg_we[v] with the shared cfg_addr / cfg_data: writes the routing unit of
//   router v (table entry, or N / s2 / own number registers).
// A flit is {address field (NODE_W bits), data (DATA_W bits)}. The address
// field is the destination node for table and adaptive routing and
// (dst - src) mod N, the clockwise distance, for clockwise routing; the
// source IP forms it.
//
// Defaults: C(100; 1, 44), the circulant the route example of the adaptive
// algorithm uses, with adaptive routing. The data width, buffer depth and
// the router micro-architecture are this design's choices.
module circulant_noc
  import rc_pkg::*;
#(
  parameter int unsigned  N          = 100,
  parameter int unsigned  S2         = 44,
  parameter routing_alg_e ALG        = ALG_ADAPTIVE,
  parameter int unsigned  DATA_W     = 32,
  parameter int unsigned  FIFO_DEPTH = 4,
  parameter int unsigned  NODE_W     = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned  CNT_W      = $clog2(N + 1),
  parameter int unsigned  FLIT_W     = NODE_W + DATA_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N-1:0]            cfg_we,
  input  logic [NODE_W-1:0]       cfg_addr,
  input  logic [CNT_W-1:0]        cfg_data,
  input  logic [N-1:0]            inj_valid,
  output logic [N-1:0]            inj_ready,
  input  logic [N-1:0][FLIT_W-1:0] inj_flit,
  output logic [N-1:0]            ej_valid,
  input  logic [N-1:0]            ej_ready,
  output logic [N-1:0][FLIT_W-1:0] ej_flit
);

  // Router-side view of every port: [node][port], port 4 = local.
  logic [N-1:0][ALL_PORTS-1:0]             r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  logic [N-1:0][ALL_PORTS-1:0][FLIT_W-1:0] r_in_flit, r_out_flit;

  for (genvar v = 0; v < N; v++) begin : g_node
    rc_router #(
      .N(N), .S2(S2), .ID(v), .ALG(ALG), .DATA_W(DATA_W), .FIFO_DEPTH(FIFO_DEPTH),
      .NODE_W(NODE_W), .CNT_W(CNT_W), .FLIT_W(FLIT_W)
    ) u_router (
      .clk, .rst_n,
      .cfg_we    (cfg_we[v]),
      .cfg_addr,
      .cfg_data,
      .in_valid  (r_in_valid[v]),
      .in_ready  (r_in_ready[v]),
      .in_flit   (r_in_flit[v]),
      .out_valid (r_out_valid[v]),
      .out_ready (r_out_ready[v]),
      .out_flit  (r_out_flit[v])
    );

    // Circulant links: input port q of node v is fed by port 3-q of the node
    // that port q points to.
    for (genvar q = 0; q < NET_PORTS; q++) begin : g_link
      localparam int unsigned NB = port_target(N, S2, v, q);
      assign r_in_valid[v][q]             = r_out_valid[NB][NET_PORTS-1-q];
      assign r_in_flit[v][q]              = r_out_flit[NB][NET_PORTS-1-q];
      assign r_out_ready[NB][NET_PORTS-1-q] = r_in_ready[v][q];
    end

    // Local port.
    assign r_in_valid[v][P_LOCAL]  = inj_valid[v];
    assign r_in_flit[v][P_LOCAL]   = inj_flit[v];
    assign inj_ready[v]            = r_in_ready[v][P_LOCAL];
    assign ej_valid[v]             = r_out_valid[v][P_LOCAL];
    assign ej_flit[v]              = r_out_flit[v][P_LOCAL];
    assign r_out_ready[v][P_LOCAL] = ej_ready[v];
  end

endmodule
