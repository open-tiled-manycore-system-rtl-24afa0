// Debug NoC definitions.
//
// The debug NoC is a 16-bit wide ring (width from the paper). A flit is a
// 16-bit word plus a "last" marker. The first flit of every packet holds the
// destination node in [15:8] and the source node in [7:0]; the second holds
// the packet type in [15:12] and a type-specific argument in [11:0]. Node 0
// is the off-chip interface. The packet types and layouts below are this
// design's choice:
//   CONFIG  host -> module   : hdr, {CONFIG, reg}, value
//   TRIGGER cross-trigger -> : hdr, {TRIGGER, [0] start [1] stop}
//   EVENT   module -> xtrig  : hdr, {EVENT,   [0] start [1] stop}
//   TRACE   itm -> host      : hdr, {TRACE, dropped}, ts_hi, ts_lo, count, pc_hi, pc_lo
//   STATS   stats -> host    : hdr, {STATS, dropped}, ts_hi, ts_lo, count per link...
package dbg_pkg;

  typedef struct packed {
    logic        last;
    logic [15:0] data;
  } dflit_t;

  typedef enum logic [3:0] {
    DT_CONFIG  = 4'd1,
    DT_TRIGGER = 4'd2,
    DT_EVENT   = 4'd3,
    DT_TRACE   = 4'd4,
    DT_STATS   = 4'd5
  } dtype_e;

  localparam logic [7:0] HOST_NODE = 8'd0;

  function automatic logic [15:0] dbg_hdr(input logic [7:0] dest, input logic [7:0] src);
    return {dest, src};
  endfunction

  function automatic logic [15:0] dbg_type(input dtype_e t, input logic [11:0] arg);
    return {t, arg};
  endfunction

endpackage
