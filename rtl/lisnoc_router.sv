// LISNoC mesh router: packet switched, wormhole forwarding, input buffered,
// with virtual channels.
//
// Five ports (local, north, east, south, west), each carrying VCHANNELS
// virtual channels over one shared flit bus per direction. Every input port
// has one FIFO per virtual channel. A header flit at a FIFO head is routed
// dimension-ordered (X first, then Y; y grows towards south) and requests its
// output port on the same virtual channel. Round-robin arbitration among the
// requesting inputs allocates the (output, VC) pair, which then stays locked
// to that input until the packet's tail flit has passed (wormhole). Each
// output link then picks, round-robin, one of its virtual channels that has a
// flit and whose downstream buffer has room, so packets on different VCs
// interleave flit by flit and a blocked VC does not block the other.
//
// Link protocol: out_valid[v] is asserted only together with out_ready[v]
// (the flit is taken in that cycle), at most one VC per cycle. in_ready is the
// "not full" flag of the input FIFO. A flit needs one cycle per hop.
//
// From the paper: packet switching, wormhole forwarding, buffering, virtual
// channels, mesh use. Own choices: XY routing, FIFO depth, round-robin
// arbitration, number of VCs (two, one per message class).
module lisnoc_router
  import lisnoc_pkg::*;
#(
  parameter int unsigned X            = 2,
  parameter int unsigned Y            = 2,
  parameter int unsigned XPOS         = 0,
  parameter int unsigned YPOS         = 0,
  parameter int unsigned VCHANNELS    = 2,
  parameter int unsigned BUFFER_DEPTH = 4
) (
  input  logic                 clk,
  input  logic                 rst,
  input  flit_t                in_flit   [PORTS],
  input  logic [VCHANNELS-1:0] in_valid  [PORTS],
  output logic [VCHANNELS-1:0] in_ready  [PORTS],
  output flit_t                out_flit  [PORTS],
  output logic [VCHANNELS-1:0] out_valid [PORTS],
  input  logic [VCHANNELS-1:0] out_ready [PORTS]
);

  localparam int unsigned PW = $clog2(PORTS);
  localparam int unsigned VW = (VCHANNELS > 1) ? $clog2(VCHANNELS) : 1;

  // Input buffers
  flit_t               head     [PORTS][VCHANNELS];
  logic                head_vld [PORTS][VCHANNELS];
  logic                pop      [PORTS][VCHANNELS];
  logic [PW-1:0]       route    [PORTS][VCHANNELS];

  for (genvar p = 0; p < PORTS; p++) begin : g_in
    for (genvar v = 0; v < VCHANNELS; v++) begin : g_vc
      logic [$clog2(BUFFER_DEPTH+1)-1:0] unused_cnt;
      sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(BUFFER_DEPTH)) u_buf (
        .clk, .rst,
        .in_data  (in_flit[p]),
        .in_valid (in_valid[p][v]),
        .in_ready (in_ready[p][v]),
        .out_data (head[p][v]),
        .out_valid(head_vld[p][v]),
        .out_ready(pop[p][v]),
        .count    (unused_cnt)
      );
      always_comb route[p][v] = xy_route(hdr_dest(head[p][v].data));
    end
  end

  function automatic logic [PW-1:0] xy_route(input logic [DEST_WIDTH-1:0] dest);
    int unsigned dx, dy;
    dx = int'(dest) % X;
    dy = int'(dest) / X;
    if (dx > XPOS)      return PW'(P_EAST);
    else if (dx < XPOS) return PW'(P_WEST);
    else if (dy > YPOS) return PW'(P_SOUTH);
    else if (dy < YPOS) return PW'(P_NORTH);
    else                return PW'(P_LOCAL);
  endfunction

  // Output allocation state per (output, VC)
  logic          lock_q  [PORTS][VCHANNELS];
  logic [PW-1:0] owner_q [PORTS][VCHANNELS];
  logic [PW-1:0] rr_q    [PORTS][VCHANNELS];
  logic [VW-1:0] vcrr_q  [PORTS];

  // Combinational selection
  logic          cand     [PORTS][VCHANNELS];
  logic [PW-1:0] cand_in  [PORTS][VCHANNELS];
  logic          sel_any  [PORTS];
  logic [VW-1:0] sel_vc   [PORTS];

  always_comb begin
    int i, vv;
    i  = 0;
    vv = 0;
    for (int o = 0; o < PORTS; o++) begin
      for (int v = 0; v < VCHANNELS; v++) begin
        cand[o][v]    = 1'b0;
        cand_in[o][v] = owner_q[o][v];
        if (lock_q[o][v]) begin
          cand[o][v] = head_vld[owner_q[o][v]][v];
        end else begin
          for (int k = 1; k <= PORTS; k++) begin
            i = (int'(rr_q[o][v]) + k) % PORTS;
            if (!cand[o][v] && head_vld[i][v] && is_head(head[i][v].ftype) &&
                route[i][v] == PW'(o)) begin
              cand[o][v]    = 1'b1;
              cand_in[o][v] = PW'(i);
            end
          end
        end
        cand[o][v] = cand[o][v] && out_ready[o][v];
      end
      sel_any[o] = 1'b0;
      sel_vc[o]  = vcrr_q[o];
      for (int k = 1; k <= VCHANNELS; k++) begin
        vv = (int'(vcrr_q[o]) + k) % VCHANNELS;
        if (!sel_any[o] && cand[o][vv]) begin
          sel_any[o] = 1'b1;
          sel_vc[o]  = VW'(vv);
        end
      end
    end
  end

  always_comb begin
    for (int p = 0; p < PORTS; p++)
      for (int v = 0; v < VCHANNELS; v++)
        pop[p][v] = 1'b0;
    for (int o = 0; o < PORTS; o++) begin
      out_valid[o] = '0;
      out_flit[o]  = head[cand_in[o][sel_vc[o]]][sel_vc[o]];
      if (sel_any[o]) begin
        out_valid[o][sel_vc[o]] = 1'b1;
        pop[cand_in[o][sel_vc[o]]][sel_vc[o]] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int o = 0; o < PORTS; o++) begin
        vcrr_q[o] <= '0;
        for (int v = 0; v < VCHANNELS; v++) begin
          lock_q[o][v]  <= 1'b0;
          owner_q[o][v] <= '0;
          rr_q[o][v]    <= '0;
        end
      end
    end else begin
      for (int o = 0; o < PORTS; o++) begin
        if (sel_any[o]) begin
          vcrr_q[o] <= sel_vc[o];
          if (!lock_q[o][sel_vc[o]]) begin
            rr_q[o][sel_vc[o]]    <= cand_in[o][sel_vc[o]];
            owner_q[o][sel_vc[o]] <= cand_in[o][sel_vc[o]];
          end
          lock_q[o][sel_vc[o]] <= !is_tail(out_flit[o].ftype);
        end
      end
    end
  end

  // A granted flit must be a packet head when the channel is free and must
  // not be a new head while the channel is locked (wormhole rule).
  always_ff @(posedge clk) begin
    if (!rst) begin
      for (int o = 0; o < PORTS; o++) begin
        if (sel_any[o]) begin
          assert (lock_q[o][sel_vc[o]] != is_head(out_flit[o].ftype))
            else $error("router: wormhole order violated on output %0d", o);
        end
      end
    end
  end

endmodule
