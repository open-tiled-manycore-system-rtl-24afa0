// Tile-internal bus definitions and address map.
//
// The tile bus is a simple request/acknowledge bus with word (32-bit)
// accesses: a master raises req with we/addr/wdata and holds them until the
// one-cycle ack, which also carries rdata for reads. Address map: local
// memory at 0x0000_0000 (upper nibble 0), network adapter registers at
// 0xE000_0000 (upper nibble E). Everything here is this design's choice; the
// paper only shows cores, caches, memory and network adapter joined by one
// tile interconnect.
package tile_pkg;

  typedef struct packed {
    logic        req;
    logic        we;
    logic [31:0] addr;
    logic [31:0] wdata;
  } bus_req_t;

  typedef struct packed {
    logic        ack;
    logic [31:0] rdata;
  } bus_rsp_t;

  localparam logic [3:0] REGION_MEM = 4'h0;
  localparam logic [3:0] REGION_NA  = 4'hE;

  function automatic logic is_mem(input logic [31:0] a);
    return a[31:28] == REGION_MEM;
  endfunction

  function automatic logic is_na(input logic [31:0] a);
    return a[31:28] == REGION_NA;
  endfunction

  // Network adapter register offsets (addr[7:0])
  localparam logic [7:0] NA_MP_TX      = 8'h00; // W: push word of a packet
  localparam logic [7:0] NA_MP_TX_LAST = 8'h04; // W: push last word of a packet
  localparam logic [7:0] NA_MP_RX_CNT  = 8'h08; // R: words waiting in receive buffer
  localparam logic [7:0] NA_MP_RX_DATA = 8'h0C; // R: pop one received word
  localparam logic [7:0] NA_MP_STATUS  = 8'h10; // R: [0] rx not empty, [1] last popped word ended a packet
  localparam logic [7:0] NA_DMA_LADDR  = 8'h20; // W/R: local source address
  localparam logic [7:0] NA_DMA_RTILE  = 8'h24; // W/R: destination tile
  localparam logic [7:0] NA_DMA_RADDR  = 8'h28; // W/R: remote destination address
  localparam logic [7:0] NA_DMA_LEN    = 8'h2C; // W/R: length in words
  localparam logic [7:0] NA_DMA_CTRL   = 8'h30; // W: start; R: [0] busy
  localparam logic [7:0] NA_DMA_RXCNT  = 8'h34; // R: words written here by remote DMA

endpackage
