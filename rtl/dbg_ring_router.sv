// Debug NoC ring router: one node of the 16-bit buffered ring.
//
// The ring input and the local (module) input each have a DEPTH-flit FIFO.
// A packet at the ring FIFO whose header names this node leaves on the
// local output; any other packet continues on the ring output. The ring
// output is shared by passing traffic and local injection: it is held by one
// source from header to last flit (wormhole), and passing traffic wins when
// both want to start a packet, so traffic already on the ring keeps moving.
//
// Deadlock avoidance (bubble rule): a wormhole ring deadlocks when every ring
// buffer is full of passing flits. Therefore a local packet is injected only
// once it is complete in the local FIFO and the next node's ring FIFO has
// room for all of it plus one more flit (ring_out_space, reported by the next
// node). Once started it cannot stall, and afterwards at least one ring slot
// is still free; passing traffic does not change the number of free slots,
// so the ring always keeps a free slot and keeps moving. Packets must not be
// longer than DEPTH-1 flits.
//
// Standard valid/ready handshake on all four ports; a flit takes one cycle
// per node. The paper gives the ring, its width and that it is buffered; the
// FIFO depth, the arbitration and the injection rule are this design's
// choice.
module dbg_ring_router
  import dbg_pkg::*;
#(
  parameter int unsigned ID    = 0,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned CW  = $clog2(DEPTH + 1)
) (
  input  logic   clk,
  input  logic   rst,
  input  dflit_t ring_in,
  input  logic   ring_in_valid,
  output logic   ring_in_ready,
  output logic [CW-1:0] ring_in_space,   // free slots of the ring FIFO
  input  logic [CW-1:0] ring_out_space,  // free slots of the next node's ring FIFO
  output dflit_t ring_out,
  output logic   ring_out_valid,
  input  logic   ring_out_ready,
  input  dflit_t loc_in,
  input  logic   loc_in_valid,
  output logic   loc_in_ready,
  output dflit_t loc_out,
  output logic   loc_out_valid,
  input  logic   loc_out_ready
);

  dflit_t rh, lh;
  logic   rh_vld, lh_vld, r_pop, l_pop;
  logic [CW-1:0] rcnt, lcnt;

  sync_fifo #(.WIDTH($bits(dflit_t)), .DEPTH(DEPTH)) u_rfifo (
    .clk, .rst, .in_data(ring_in), .in_valid(ring_in_valid), .in_ready(ring_in_ready),
    .out_data(rh), .out_valid(rh_vld), .out_ready(r_pop), .count(rcnt));
  sync_fifo #(.WIDTH($bits(dflit_t)), .DEPTH(DEPTH)) u_lfifo (
    .clk, .rst, .in_data(loc_in), .in_valid(loc_in_valid), .in_ready(loc_in_ready),
    .out_data(lh), .out_valid(lh_vld), .out_ready(l_pop), .count(lcnt));

  assign ring_in_space = CW'(DEPTH) - rcnt;

  // lengths of the complete packets waiting in the local FIFO
  logic [CW-1:0] plen_q, plen_head;
  logic          plen_vld, plen_ready;
  logic [CW-1:0] plen_cnt;
  wire           loc_push = loc_in_valid && loc_in_ready;
  sync_fifo #(.WIDTH(CW), .DEPTH(DEPTH)) u_plen (
    .clk, .rst, .in_data(plen_q + 1'b1), .in_valid(loc_push && loc_in.last), .in_ready(plen_ready),
    .out_data(plen_head), .out_valid(plen_vld), .out_ready(l_pop && lh.last), .count(plen_cnt));
  always_ff @(posedge clk) begin
    if (rst)           plen_q <= '0;
    else if (loc_push) plen_q <= loc_in.last ? '0 : plen_q + 1'b1;
  end
  wire inject_ok = plen_vld && ring_out_space > plen_head;

  // packet boundary tracking for the ring FIFO head
  logic r_start_q;      // head of ring FIFO is a header flit
  logic r_local_q;      // current ring packet is for this node
  wire  r_local = r_start_q ? (rh.data[15:8] == 8'(ID)) : r_local_q;

  // ring output ownership
  logic lock_q, own_loc_q;
  logic use_ring, use_loc;

  always_comb begin
    use_ring = 1'b0;
    use_loc  = 1'b0;
    if (lock_q) begin
      use_ring = !own_loc_q && rh_vld && !r_local;
      use_loc  = own_loc_q && lh_vld;
    end else if (rh_vld && !r_local) begin
      use_ring = 1'b1;
    end else if (lh_vld && inject_ok) begin
      use_loc = 1'b1;
    end
    ring_out_valid = use_ring || use_loc;
    ring_out       = use_loc ? lh : rh;
    loc_out_valid  = rh_vld && r_local;
    loc_out        = rh;
    r_pop = (use_ring && ring_out_ready) || (loc_out_valid && loc_out_ready);
    l_pop = use_loc && ring_out_ready;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      r_start_q <= 1'b1;
      r_local_q <= 1'b0;
      lock_q    <= 1'b0;
      own_loc_q <= 1'b0;
    end else begin
      if (r_pop) begin
        r_start_q <= rh.last;
        r_local_q <= r_local;
      end
      if (ring_out_valid && ring_out_ready) begin
        lock_q    <= !ring_out.last;
        own_loc_q <= use_loc;
      end
    end
  end

endmodule
