// table_routing: table routing unit of one router of C(N; 1, S2).
//
// The head flit carries the destination node number (P = ceil(log2 N) bits).
// The router holds its own row of the network-wide routing table: N entries
// of ceil(log2 p) = 2 bits, entry d giving the network port on which a packet
// for node d leaves. Routing is then a single table read (a multiplexer).
// The full table of the network is N*N*2 bits, distributed one row per
// router.
//
// The row is a register array. At reset it is loaded with shortest-path
// first hops computed at elaboration (lowest-numbered port among those that
// start a shortest path, which reproduces the printed table for C(8;1,3) up
// to the numbering of ports 2 and 3). Entries can be rewritten at any time
// through the cfg_* port (cfg_addr = destination, cfg_data[1:0] = port), so
// any precomputed route set can be loaded.
//
// Arrival is detected by comparing the destination with the node number ID,
// which is a hard-wired parameter of this design; the table itself has no
// entry for the own node.
//
// Timing: addr_in -> is_local / out_port is combinational; a table write takes
// effect on the next clock edge. addr_out is addr_in (the destination field is
// not rewritten by this algorithm).
module table_routing
  import rc_pkg::*;
#(
  parameter int unsigned N      = 100,
  parameter int unsigned S2     = 44,
  parameter int unsigned ID     = 0,
  parameter int unsigned NODE_W = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned CNT_W  = $clog2(N + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [NODE_W-1:0] cfg_addr,
  input  logic [CNT_W-1:0]  cfg_data,
  input  logic [NODE_W-1:0] addr_in,
  output logic              is_local,
  output logic [PORT_W-1:0] out_port,
  output logic [NODE_W-1:0] addr_out
);

  logic [PORT_W-1:0] row [N];

  for (genvar d = 0; d < N; d++) begin : g_entry
    localparam logic [PORT_W-1:0] INIT = table_hop(N, S2, ID, d);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                                    row[d] <= INIT;
      else if (cfg_we && cfg_addr == NODE_W'(d))     row[d] <= cfg_data[PORT_W-1:0];
    end
  end

  always_comb begin
    is_local = (addr_in == NODE_W'(ID));
    out_port = (int'(addr_in) < N) ? row[addr_in] : '0;
    addr_out = addr_in;
  end

endmodule
