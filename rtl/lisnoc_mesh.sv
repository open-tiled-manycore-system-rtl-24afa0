// LISNoC 2-D mesh: X by Y routers, one tile on the local port of each.
//
// Router (x, y) serves tile y*X + x. Its north port faces router (x, y-1),
// east faces (x+1, y), south (x, y+1) and west (x-1, y). Ports on the mesh
// edge are tied off (no flits in, never ready). The local ports appear as the
// mesh's tile ports. link_act reports, per router and output port, that a
// flit left on that link in this cycle; the link statistics debug modules
// count it. The paper's sample system (its 2x2 figure) is the default size.
module lisnoc_mesh
  import lisnoc_pkg::*;
#(
  parameter int unsigned X            = 2,
  parameter int unsigned Y            = 2,
  parameter int unsigned VCHANNELS    = 2,
  parameter int unsigned BUFFER_DEPTH = 4,
  localparam int unsigned NODES       = X * Y
) (
  input  logic                 clk,
  input  logic                 rst,
  // tile -> mesh
  input  flit_t                in_flit   [NODES],
  input  logic [VCHANNELS-1:0] in_valid  [NODES],
  output logic [VCHANNELS-1:0] in_ready  [NODES],
  // mesh -> tile
  output flit_t                out_flit  [NODES],
  output logic [VCHANNELS-1:0] out_valid [NODES],
  input  logic [VCHANNELS-1:0] out_ready [NODES],
  // per router output link activity
  output logic [PORTS-1:0]     link_act  [NODES]
);

  flit_t                r_in_flit   [NODES][PORTS];
  logic [VCHANNELS-1:0] r_in_valid  [NODES][PORTS];
  logic [VCHANNELS-1:0] r_in_ready  [NODES][PORTS];
  flit_t                r_out_flit  [NODES][PORTS];
  logic [VCHANNELS-1:0] r_out_valid [NODES][PORTS];
  logic [VCHANNELS-1:0] r_out_ready [NODES][PORTS];

  for (genvar y = 0; y < Y; y++) begin : g_y
    for (genvar x = 0; x < X; x++) begin : g_x
      localparam int unsigned N = y * X + x;

      lisnoc_router #(
        .X(X), .Y(Y), .XPOS(x), .YPOS(y),
        .VCHANNELS(VCHANNELS), .BUFFER_DEPTH(BUFFER_DEPTH)
      ) u_router (
        .clk, .rst,
        .in_flit  (r_in_flit[N]),
        .in_valid (r_in_valid[N]),
        .in_ready (r_in_ready[N]),
        .out_flit (r_out_flit[N]),
        .out_valid(r_out_valid[N]),
        .out_ready(r_out_ready[N])
      );

      // local port
      always_comb begin
        r_in_flit[N][P_LOCAL]   = in_flit[N];
        r_in_valid[N][P_LOCAL]  = in_valid[N];
        in_ready[N]             = r_in_ready[N][P_LOCAL];
        out_flit[N]             = r_out_flit[N][P_LOCAL];
        out_valid[N]            = r_out_valid[N][P_LOCAL];
        r_out_ready[N][P_LOCAL] = out_ready[N];
        for (int p = 0; p < PORTS; p++) link_act[N][p] = |r_out_valid[N][p];
      end

      // neighbour links: input of port p comes from the neighbour's opposite port
      if (y > 0) begin : g_n
        localparam int unsigned M = (y - 1) * X + x;
        assign r_in_flit[N][P_NORTH]   = r_out_flit[M][P_SOUTH];
        assign r_in_valid[N][P_NORTH]  = r_out_valid[M][P_SOUTH];
        assign r_out_ready[N][P_NORTH] = r_in_ready[M][P_SOUTH];
      end else begin : g_n_edge
        assign r_in_flit[N][P_NORTH]   = '0;
        assign r_in_valid[N][P_NORTH]  = '0;
        assign r_out_ready[N][P_NORTH] = '0;
      end
      if (y < Y - 1) begin : g_s
        localparam int unsigned M = (y + 1) * X + x;
        assign r_in_flit[N][P_SOUTH]   = r_out_flit[M][P_NORTH];
        assign r_in_valid[N][P_SOUTH]  = r_out_valid[M][P_NORTH];
        assign r_out_ready[N][P_SOUTH] = r_in_ready[M][P_NORTH];
      end else begin : g_s_edge
        assign r_in_flit[N][P_SOUTH]   = '0;
        assign r_in_valid[N][P_SOUTH]  = '0;
        assign r_out_ready[N][P_SOUTH] = '0;
      end
      if (x < X - 1) begin : g_e
        localparam int unsigned M = y * X + x + 1;
        assign r_in_flit[N][P_EAST]   = r_out_flit[M][P_WEST];
        assign r_in_valid[N][P_EAST]  = r_out_valid[M][P_WEST];
        assign r_out_ready[N][P_EAST] = r_in_ready[M][P_WEST];
      end else begin : g_e_edge
        assign r_in_flit[N][P_EAST]   = '0;
        assign r_in_valid[N][P_EAST]  = '0;
        assign r_out_ready[N][P_EAST] = '0;
      end
      if (x > 0) begin : g_w
        localparam int unsigned M = y * X + x - 1;
        assign r_in_flit[N][P_WEST]   = r_out_flit[M][P_EAST];
        assign r_in_valid[N][P_WEST]  = r_out_valid[M][P_EAST];
        assign r_out_ready[N][P_WEST] = r_in_ready[M][P_EAST];
      end else begin : g_w_edge
        assign r_in_flit[N][P_WEST]   = '0;
        assign r_in_valid[N][P_WEST]  = '0;
        assign r_out_ready[N][P_WEST] = '0;
      end
    end
  end

endmodule
