// clockwise_routing: clockwise routing unit of one router of C(N; 1, s2).
//
// The head flit carries S, the distance from the current node to the
// destination counted clockwise, (dst - cur) mod N, in P = ceil(log2 N) bits.
// The router stores only N and s2. Each hop:
//   S == 0            : the packet has arrived (local port);
//   2*S <= N          : go clockwise, over s2 while S >= s2, else over 1;
//                       the field becomes S - step;
//   otherwise         : go counter-clockwise, over s2 while N - S >= s2,
//                       else over 1; the field becomes S + step, where the
//                       value N is stored as 0 (same node, "arrived").
// This is the hop-by-hop form of the Find_Route_Clockwise algorithm; it never
// turns back, so routes can be longer than the shortest ones.
//
// n_reg and s2_reg are registers loaded from the parameters N and S2 at reset
// and writable through cfg_* (cfg_addr 0: number of nodes, 1: s2). N is kept
// in ceil(log2(N+1)) bits so that a power-of-two N fits.
//
// Timing: addr_in -> is_local / out_port / addr_out is combinational.
module clockwise_routing
  import rc_pkg::*;
#(
  parameter int unsigned N      = 100,
  parameter int unsigned S2     = 44,
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

  logic [CNT_W-1:0] n_reg, s2_reg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_reg  <= CNT_W'(N);
      s2_reg <= CNT_W'(S2);
    end else if (cfg_we) begin
      if (cfg_addr == NODE_W'(0)) n_reg  <= cfg_data;
      if (cfg_addr == NODE_W'(1)) s2_reg <= cfg_data;
    end
  end

  logic [CNT_W:0] s, back, nxt;

  always_comb begin
    s        = (CNT_W + 1)'(addr_in);
    back     = {1'b0, n_reg} - s;          // counter-clockwise distance N - S
    is_local = (s == '0);
    out_port = P_PLUS_S1;
    nxt      = s;
    if (!is_local) begin
      if ((s << 1) <= {1'b0, n_reg}) begin
        if (s >= {1'b0, s2_reg}) begin
          out_port = P_PLUS_S2;
          nxt      = s - {1'b0, s2_reg};
        end else begin
          out_port = P_PLUS_S1;
          nxt      = s - 1'b1;
        end
      end else begin
        if (back >= {1'b0, s2_reg}) begin
          out_port = P_MINUS_S2;
          nxt      = s + {1'b0, s2_reg};
        end else begin
          out_port = P_MINUS_S1;
          nxt      = s + 1'b1;
        end
        if (nxt >= {1'b0, n_reg}) nxt = nxt - {1'b0, n_reg};
      end
    end
    addr_out = nxt[NODE_W-1:0];
  end

endmodule
