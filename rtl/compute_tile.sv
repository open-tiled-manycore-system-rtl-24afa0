// Compute tile in the distributed-memory organisation: CORES processor
// cores, each with an instruction and a data cache, sharing one local memory
// over the tile bus, plus a network adapter to the NoC.
//
// The cores themselves (OpenRISC in the paper) are not part of this RTL: each
// core's instruction port and data port enter the tile as tile-bus requests
// (core_ibus_*/core_dbus_*) and go through a write-through cache. Bus master
// order: I$ of core c is master 2c, D$ is 2c+1, then the adapter's DMA read
// and DMA write masters. Every completed bus write is snooped by all caches
// (the paper's write-through snooping coherence). hit/inval pulses are
// exported for observation.
module compute_tile
  import lisnoc_pkg::*;
  import tile_pkg::*;
#(
  parameter int unsigned TILE_ID      = 0,
  parameter int unsigned CORES        = 1,
  parameter int unsigned MEM_WORDS    = 8192,
  parameter int unsigned CACHE_LINES  = 64,
  parameter int unsigned VCHANNELS    = 2
) (
  input  logic                 clk,
  input  logic                 rst,
  input  bus_req_t             core_ibus_req [CORES],
  output bus_rsp_t             core_ibus_rsp [CORES],
  input  bus_req_t             core_dbus_req [CORES],
  output bus_rsp_t             core_dbus_rsp [CORES],
  output logic                 irq,
  output flit_t                noc_out_flit,
  output logic [VCHANNELS-1:0] noc_out_valid,
  input  logic [VCHANNELS-1:0] noc_out_ready,
  input  flit_t                noc_in_flit,
  input  logic [VCHANNELS-1:0] noc_in_valid,
  output logic [VCHANNELS-1:0] noc_in_ready,
  output logic [2*CORES-1:0]   cache_hit,
  output logic [2*CORES-1:0]   cache_inval
);

  localparam int unsigned NM = 2 * CORES + 2;
  localparam int unsigned MW = $clog2(NM);

  bus_req_t m_req [NM];
  bus_rsp_t m_rsp [NM];
  bus_req_t mem_req, na_req;
  bus_rsp_t mem_rsp, na_rsp;
  logic          snoop_valid;
  logic [31:0]   snoop_addr;
  logic [MW-1:0] snoop_master;

  for (genvar c = 0; c < CORES; c++) begin : g_core
    wt_cache #(.LINES(CACHE_LINES), .MASTER_ID(2*c), .MW(MW)) u_icache (
      .clk, .rst,
      .core_req(core_ibus_req[c]), .core_rsp(core_ibus_rsp[c]),
      .bus_req(m_req[2*c]), .bus_rsp(m_rsp[2*c]),
      .snoop_valid, .snoop_addr, .snoop_master,
      .hit_o(cache_hit[2*c]), .inval_o(cache_inval[2*c])
    );
    wt_cache #(.LINES(CACHE_LINES), .MASTER_ID(2*c+1), .MW(MW)) u_dcache (
      .clk, .rst,
      .core_req(core_dbus_req[c]), .core_rsp(core_dbus_rsp[c]),
      .bus_req(m_req[2*c+1]), .bus_rsp(m_rsp[2*c+1]),
      .snoop_valid, .snoop_addr, .snoop_master,
      .hit_o(cache_hit[2*c+1]), .inval_o(cache_inval[2*c+1])
    );
  end

  tile_bus #(.NM(NM)) u_bus (
    .clk, .rst,
    .m_req, .m_rsp,
    .mem_req, .mem_rsp, .na_req, .na_rsp,
    .snoop_valid, .snoop_addr, .snoop_master
  );

  tile_memory #(.MEM_WORDS(MEM_WORDS)) u_mem (
    .clk, .rst, .req(mem_req), .rsp(mem_rsp)
  );

  network_adapter #(.TILE_ID(TILE_ID), .VCHANNELS(VCHANNELS)) u_na (
    .clk, .rst,
    .s_req(na_req), .s_rsp(na_rsp),
    .dma_rd_req(m_req[NM-2]), .dma_rd_rsp(m_rsp[NM-2]),
    .dma_wr_req(m_req[NM-1]), .dma_wr_rsp(m_rsp[NM-1]),
    .noc_out_flit, .noc_out_valid, .noc_out_ready,
    .noc_in_flit, .noc_in_valid, .noc_in_ready,
    .irq
  );

endmodule
