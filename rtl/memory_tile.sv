// Memory tile: a tile without cores that offers its memory to the other
// tiles. Its network adapter's DMA target writes incoming memory transfers
// into the local memory, and its DMA initiator can send memory contents to
// another tile when its registers are programmed (over the ext_req bus port,
// which stands for any local master such as a boot or host bridge). The paper
// shows the memory tile in its 2x2 sample system without describing its
// insides; it is built here from the same memory, bus and adapter as a
// compute tile.
module memory_tile
  import lisnoc_pkg::*;
  import tile_pkg::*;
#(
  parameter int unsigned TILE_ID   = 1,
  parameter int unsigned MEM_WORDS = 8192,
  parameter int unsigned VCHANNELS = 2
) (
  input  logic                 clk,
  input  logic                 rst,
  input  bus_req_t             ext_req,
  output bus_rsp_t             ext_rsp,
  output logic                 irq,
  output flit_t                noc_out_flit,
  output logic [VCHANNELS-1:0] noc_out_valid,
  input  logic [VCHANNELS-1:0] noc_out_ready,
  input  flit_t                noc_in_flit,
  input  logic [VCHANNELS-1:0] noc_in_valid,
  output logic [VCHANNELS-1:0] noc_in_ready
);

  bus_req_t m_req [3];
  bus_rsp_t m_rsp [3];
  bus_req_t mem_req, na_req;
  bus_rsp_t mem_rsp, na_rsp;
  logic        snoop_valid;
  logic [31:0] snoop_addr;
  logic [1:0]  snoop_master;

  assign m_req[0] = ext_req;
  assign ext_rsp  = m_rsp[0];

  tile_bus #(.NM(3)) u_bus (
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
    .dma_rd_req(m_req[1]), .dma_rd_rsp(m_rsp[1]),
    .dma_wr_req(m_req[2]), .dma_wr_rsp(m_rsp[2]),
    .noc_out_flit, .noc_out_valid, .noc_out_ready,
    .noc_in_flit, .noc_in_valid, .noc_in_ready,
    .irq
  );

endmodule
