// LISNoC shared definitions: flit format, header fields, router port numbering.
//
// A flit carries a 2-bit type and a 32-bit data word. A packet is either a
// single flit (SINGLE) or a HEADER, any number of PAYLOAD flits and a LAST
// flit. The header word holds the destination tile in [31:27], a packet class
// in [26:24] and the source tile in [23:19]; the rest is free for the sender.
// The paper describes LISNoC as packet-switched, wormhole-forwarding and
// buffered with virtual channels; the field layout, widths and the two-class
// use of the virtual channels (message passing on 0, DMA on 1) are choices of
// this design.
package lisnoc_pkg;

  localparam int unsigned FLIT_DATA_WIDTH = 32;
  localparam int unsigned DEST_WIDTH      = 5;

  typedef enum logic [1:0] {
    FLIT_PAYLOAD = 2'b00,
    FLIT_HEADER  = 2'b01,
    FLIT_LAST    = 2'b10,
    FLIT_SINGLE  = 2'b11
  } flit_type_e;

  typedef struct packed {
    flit_type_e                 ftype;
    logic [FLIT_DATA_WIDTH-1:0] data;
  } flit_t;

  // Virtual channel assignment (one message class per channel).
  localparam int unsigned VC_MP  = 0;
  localparam int unsigned VC_DMA = 1;

  // Packet classes carried in header[26:24].
  localparam logic [2:0] CLASS_MP  = 3'd0;
  localparam logic [2:0] CLASS_DMA = 3'd1;

  // Router ports.
  localparam int unsigned PORTS = 5;
  localparam int unsigned P_LOCAL = 0;
  localparam int unsigned P_NORTH = 1;
  localparam int unsigned P_EAST  = 2;
  localparam int unsigned P_SOUTH = 3;
  localparam int unsigned P_WEST  = 4;

  function automatic logic [DEST_WIDTH-1:0] hdr_dest(input logic [FLIT_DATA_WIDTH-1:0] d);
    return d[31:27];
  endfunction

  function automatic logic [DEST_WIDTH-1:0] hdr_src(input logic [FLIT_DATA_WIDTH-1:0] d);
    return d[23:19];
  endfunction

  function automatic logic [FLIT_DATA_WIDTH-1:0] make_hdr(input logic [DEST_WIDTH-1:0] dest,
                                                          input logic [2:0] cls,
                                                          input logic [DEST_WIDTH-1:0] src);
    return {dest, cls, src, 19'd0};
  endfunction

  function automatic logic is_head(input flit_type_e t);
    return (t == FLIT_HEADER) || (t == FLIT_SINGLE);
  endfunction

  function automatic logic is_tail(input flit_type_e t);
    return (t == FLIT_LAST) || (t == FLIT_SINGLE);
  endfunction

endpackage
