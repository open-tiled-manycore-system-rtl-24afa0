// OpTiMSoC sample system: a 2x2 tiled manycore with its debug infrastructure.
//
// Four tiles on a 2x2 LISNoC mesh. Tile MEM_TILE is a memory tile, the
// others are compute tiles in the distributed-memory organisation (cores
// with write-through caches, local memory, network adapter). Tile t sits at
// mesh position (t % 2, t / 2). The processor cores are not part of this RTL:
// their instruction and data ports (tile-bus requests) and their
// retired-instruction trace enter as ports, indexed tile*CORES + core; the
// entries of the memory tile are unused. The memory tile's local bus port
// (ext_*) is also a port.
//
// Debug NoC (16-bit ring), node numbers:
//   0                      off-chip interface (USB word FIFO ports usb_*)
//   1 .. NITM              instruction trace module per core of each compute tile
//   NITM+1 .. NITM+NODES   link statistics module per router
//   NITM+NODES+1           cross-trigger unit
// A free-running 32-bit counter is the global timestamp of all trace and
// statistics packets. The arrangement follows the paper's 2x2 sample system
// figure without its memory trace module and debug controller, which the
// paper does not describe.
module optimsoc_system
  import lisnoc_pkg::*;
  import tile_pkg::*;
  import dbg_pkg::*;
#(
  parameter int unsigned CORES       = 1,
  parameter int unsigned MEM_WORDS   = 8192,
  parameter int unsigned CACHE_LINES = 64,
  parameter int unsigned MEM_TILE    = 1,
  localparam int unsigned X          = 2,
  localparam int unsigned Y          = 2,
  localparam int unsigned NODES      = X * Y,
  localparam int unsigned NC         = NODES * CORES,
  localparam int unsigned NITM       = (NODES - 1) * CORES,
  localparam int unsigned XTRIG_ID   = NITM + NODES + 1,
  localparam int unsigned DBG_NODES  = XTRIG_ID + 1
) (
  input  logic        clk,
  input  logic        rst,
  // cores
  input  bus_req_t    core_ibus_req [NC],
  output bus_rsp_t    core_ibus_rsp [NC],
  input  bus_req_t    core_dbus_req [NC],
  output bus_rsp_t    core_dbus_rsp [NC],
  input  logic        trace_valid   [NC],
  input  logic [31:0] trace_pc      [NC],
  output logic        irq           [NODES],
  // memory tile local master
  input  bus_req_t    ext_req,
  output bus_rsp_t    ext_rsp,
  // off-chip debug interface
  output logic [15:0] usb_out_data,
  output logic        usb_out_valid,
  input  logic        usb_out_ready,
  input  logic [15:0] usb_in_data,
  input  logic        usb_in_valid,
  output logic        usb_in_ready
);

  localparam int unsigned VCH = 2;

  // ---------------- LISNoC mesh ----------------
  flit_t          t_out_flit  [NODES];
  logic [VCH-1:0] t_out_valid [NODES];
  logic [VCH-1:0] t_out_ready [NODES];
  flit_t          t_in_flit   [NODES];
  logic [VCH-1:0] t_in_valid  [NODES];
  logic [VCH-1:0] t_in_ready  [NODES];
  logic [PORTS-1:0] link_act  [NODES];

  lisnoc_mesh #(.X(X), .Y(Y), .VCHANNELS(VCH)) u_mesh (
    .clk, .rst,
    .in_flit(t_out_flit), .in_valid(t_out_valid), .in_ready(t_out_ready),
    .out_flit(t_in_flit), .out_valid(t_in_valid), .out_ready(t_in_ready),
    .link_act
  );

  // ---------------- tiles ----------------
  for (genvar t = 0; t < NODES; t++) begin : g_tile
    if (t == MEM_TILE) begin : g_mem
      memory_tile #(.TILE_ID(t), .MEM_WORDS(MEM_WORDS), .VCHANNELS(VCH)) u_tile (
        .clk, .rst, .ext_req, .ext_rsp, .irq(irq[t]),
        .noc_out_flit(t_out_flit[t]), .noc_out_valid(t_out_valid[t]), .noc_out_ready(t_out_ready[t]),
        .noc_in_flit(t_in_flit[t]), .noc_in_valid(t_in_valid[t]), .noc_in_ready(t_in_ready[t])
      );
      for (genvar c = 0; c < CORES; c++) begin : g_unused
        assign core_ibus_rsp[t*CORES+c] = '0;
        assign core_dbus_rsp[t*CORES+c] = '0;
      end
    end else begin : g_cmp
      bus_req_t ireq [CORES], dreq [CORES];
      bus_rsp_t irsp [CORES], drsp [CORES];
      logic [2*CORES-1:0] hit, inval;
      for (genvar c = 0; c < CORES; c++) begin : g_c
        assign ireq[c] = core_ibus_req[t*CORES+c];
        assign dreq[c] = core_dbus_req[t*CORES+c];
        assign core_ibus_rsp[t*CORES+c] = irsp[c];
        assign core_dbus_rsp[t*CORES+c] = drsp[c];
      end
      compute_tile #(.TILE_ID(t), .CORES(CORES), .MEM_WORDS(MEM_WORDS),
                     .CACHE_LINES(CACHE_LINES), .VCHANNELS(VCH)) u_tile (
        .clk, .rst,
        .core_ibus_req(ireq), .core_ibus_rsp(irsp),
        .core_dbus_req(dreq), .core_dbus_rsp(drsp),
        .irq(irq[t]),
        .noc_out_flit(t_out_flit[t]), .noc_out_valid(t_out_valid[t]), .noc_out_ready(t_out_ready[t]),
        .noc_in_flit(t_in_flit[t]), .noc_in_valid(t_in_valid[t]), .noc_in_ready(t_in_ready[t]),
        .cache_hit(hit), .cache_inval(inval)
      );
    end
  end

  // ---------------- debug infrastructure ----------------
  logic [31:0] timestamp_q;
  always_ff @(posedge clk) begin
    if (rst) timestamp_q <= '0;
    else     timestamp_q <= timestamp_q + 32'd1;
  end

  dflit_t d_to_ring   [DBG_NODES];
  logic   d_to_vld    [DBG_NODES];
  logic   d_to_rdy    [DBG_NODES];
  dflit_t d_from_ring [DBG_NODES];
  logic   d_from_vld  [DBG_NODES];
  logic   d_from_rdy  [DBG_NODES];

  dbg_ring #(.NODES(DBG_NODES)) u_dbg_ring (
    .clk, .rst,
    .loc_in(d_to_ring), .loc_in_valid(d_to_vld), .loc_in_ready(d_to_rdy),
    .loc_out(d_from_ring), .loc_out_valid(d_from_vld), .loc_out_ready(d_from_rdy)
  );

  dbg_usb_if u_usb (
    .clk, .rst,
    .usb_out_data, .usb_out_valid, .usb_out_ready,
    .usb_in_data, .usb_in_valid, .usb_in_ready,
    .dbg_out(d_to_ring[0]), .dbg_out_valid(d_to_vld[0]), .dbg_out_ready(d_to_rdy[0]),
    .dbg_in(d_from_ring[0]), .dbg_in_valid(d_from_vld[0]), .dbg_in_ready(d_from_rdy[0])
  );

  for (genvar t = 0; t < NODES; t++) begin : g_dbg
    if (t != MEM_TILE) begin : g_itm
      localparam int unsigned K = (t < MEM_TILE) ? t : t - 1;  // compute tile number
      for (genvar c = 0; c < CORES; c++) begin : g_c
        localparam int unsigned N = 1 + K * CORES + c;
        logic tracing, dropped;
        dbg_itm #(.ID(N), .XTRIG_ID(XTRIG_ID), .HOST_ID(0)) u_itm (
          .clk, .rst,
          .trace_valid(trace_valid[t*CORES+c]), .trace_pc(trace_pc[t*CORES+c]),
          .timestamp(timestamp_q),
          .dbg_out(d_to_ring[N]), .dbg_out_valid(d_to_vld[N]), .dbg_out_ready(d_to_rdy[N]),
          .dbg_in(d_from_ring[N]), .dbg_in_valid(d_from_vld[N]), .dbg_in_ready(d_from_rdy[N]),
          .tracing, .dropped_o(dropped)
        );
      end
    end
    begin : g_stats
      localparam int unsigned N = 1 + NITM + t;
      logic report;
      dbg_link_stats #(.ID(N), .HOST_ID(0), .NPORTS(PORTS)) u_stats (
        .clk, .rst, .link_act(link_act[t]), .timestamp(timestamp_q),
        .dbg_out(d_to_ring[N]), .dbg_out_valid(d_to_vld[N]), .dbg_out_ready(d_to_rdy[N]),
        .dbg_in(d_from_ring[N]), .dbg_in_valid(d_from_vld[N]), .dbg_in_ready(d_from_rdy[N]),
        .report_o(report)
      );
    end
  end

  logic xtrig_fire;
  dbg_cross_trigger #(.ID(XTRIG_ID)) u_xtrig (
    .clk, .rst,
    .dbg_out(d_to_ring[XTRIG_ID]), .dbg_out_valid(d_to_vld[XTRIG_ID]), .dbg_out_ready(d_to_rdy[XTRIG_ID]),
    .dbg_in(d_from_ring[XTRIG_ID]), .dbg_in_valid(d_from_vld[XTRIG_ID]), .dbg_in_ready(d_from_rdy[XTRIG_ID]),
    .fire_o(xtrig_fire)
  );

endmodule
