// Debug NoC: NODES ring routers connected in a unidirectional ring
// (node i sends to node i+1, the last node to node 0). Each node's local
// ports connect one debug module or the off-chip interface. Each node tells
// its upstream neighbour how much room its ring FIFO has (injection rule,
// see dbg_ring_router).
module dbg_ring
  import dbg_pkg::*;
#(
  parameter int unsigned NODES = 4,
  parameter int unsigned DEPTH = 16
) (
  input  logic   clk,
  input  logic   rst,
  input  dflit_t loc_in        [NODES],
  input  logic   loc_in_valid  [NODES],
  output logic   loc_in_ready  [NODES],
  output dflit_t loc_out       [NODES],
  output logic   loc_out_valid [NODES],
  input  logic   loc_out_ready [NODES]
);

  dflit_t ring     [NODES];
  logic   ring_vld [NODES];
  logic   ring_rdy [NODES];
  logic [$clog2(DEPTH+1)-1:0] space [NODES];

  for (genvar i = 0; i < NODES; i++) begin : g_node
    localparam int unsigned PREV = (i + NODES - 1) % NODES;
    dbg_ring_router #(.ID(i), .DEPTH(DEPTH)) u_router (
      .clk, .rst,
      .ring_in(ring[PREV]), .ring_in_valid(ring_vld[PREV]), .ring_in_ready(ring_rdy[PREV]),
      .ring_in_space(space[i]), .ring_out_space(space[(i + 1) % NODES]),
      .ring_out(ring[i]), .ring_out_valid(ring_vld[i]), .ring_out_ready(ring_rdy[i]),
      .loc_in(loc_in[i]), .loc_in_valid(loc_in_valid[i]), .loc_in_ready(loc_in_ready[i]),
      .loc_out(loc_out[i]), .loc_out_valid(loc_out_valid[i]), .loc_out_ready(loc_out_ready[i])
    );
  end

endmodule
