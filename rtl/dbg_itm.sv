// Instruction trace module: debug module that records the program flow of
// one core and sends it, time stamped, over the debug NoC to the host.
//
// Input is the core's retired-instruction stream (trace_valid, trace_pc).
// Tracing runs while "tracing" is set: directly by the host (CONFIG reg 0
// bit 0), by a program-counter trigger (reg 0 bit 1 arms: retiring the start
// PC, regs 1/2, starts; the stop PC, regs 3/4, stops), or by a TRIGGER packet
// from the cross-trigger unit. A PC trigger also sends an EVENT packet to the
// cross-trigger node XTRIG_ID so that other modules can follow.
// Compression (COMPRESS=1): an instruction at last_pc+4 only increments a
// counter; a non-sequential one (a jump, or the first after tracing starts)
// produces a message {timestamp, count of sequential instructions since the
// previous message, pc}. With COMPRESS=0 every instruction is a message.
// Messages wait in a QDEPTH queue; when it is full a message is dropped and
// the drop count is sent with the next message (overflow). Each message is
// a 7-word TRACE packet to HOST_ID.
// The paper gives trace collection, triggers, timestamps and that only the
// instruction trace is compressed; the compression scheme, the trigger
// conditions and the packet layout are this design's choice.
module dbg_itm
  import dbg_pkg::*;
#(
  parameter int unsigned ID       = 1,
  parameter int unsigned XTRIG_ID = 2,
  parameter int unsigned HOST_ID  = 0,
  parameter bit          COMPRESS = 1'b1,
  parameter int unsigned QDEPTH   = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        trace_valid,
  input  logic [31:0] trace_pc,
  input  logic [31:0] timestamp,
  output dflit_t      dbg_out,
  output logic        dbg_out_valid,
  input  logic        dbg_out_ready,
  input  dflit_t      dbg_in,
  input  logic        dbg_in_valid,
  output logic        dbg_in_ready,
  output logic        tracing,
  output logic        dropped_o     // pulse: a message was dropped
);

  // ---- packet input ----
  logic        rx_v;
  logic [7:0]  rx_src;
  logic [3:0]  rx_type;
  logic [11:0] rx_arg;
  logic [15:0] rx_val;
  dbg_pkt_rx u_rx (.clk, .rst, .in(dbg_in), .in_valid(dbg_in_valid), .in_ready(dbg_in_ready),
                   .pkt_valid(rx_v), .pkt_src(rx_src), .pkt_type(rx_type), .pkt_arg(rx_arg),
                   .pkt_value(rx_val));

  logic        armed_q, tracing_q, have_last_q;
  logic [31:0] start_pc_q, stop_pc_q, last_pc_q;
  logic [15:0] cnt_q;
  logic [11:0] drop_q;
  logic        ev_start_q, ev_stop_q;

  wire start_hit = trace_valid && armed_q && trace_pc == start_pc_q;
  wire stop_hit  = trace_valid && armed_q && trace_pc == stop_pc_q;
  wire active    = (tracing_q || start_hit) && !stop_hit;
  wire seq       = COMPRESS && have_last_q && trace_pc == last_pc_q + 32'd4 && cnt_q != 16'hFFFF;
  wire emit      = trace_valid && active && !seq;

  assign tracing = tracing_q;

  // ---- message queue ----
  logic [79:0] q_head;
  logic        q_ready, q_vld, q_pop;
  logic [$clog2(QDEPTH+1)-1:0] q_cnt;
  sync_fifo #(.WIDTH(80), .DEPTH(QDEPTH)) u_q (
    .clk, .rst, .in_data({timestamp, cnt_q, trace_pc}), .in_valid(emit), .in_ready(q_ready),
    .out_data(q_head), .out_valid(q_vld), .out_ready(q_pop), .count(q_cnt));

  assign dropped_o = emit && !q_ready;

  // ---- packet output ----
  logic        tx_busy, tx_start;
  logic [2:0]  tx_len;
  logic [15:0] tx_w [7];
  dbg_pkt_tx #(.MAXW(7)) u_tx (.clk, .rst, .start(tx_start), .len(tx_len), .words(tx_w),
                               .busy(tx_busy), .out(dbg_out), .out_valid(dbg_out_valid),
                               .out_ready(dbg_out_ready));

  always_comb begin
    for (int i = 0; i < 7; i++) tx_w[i] = '0;
    tx_start = 1'b0;
    tx_len   = 3'd0;
    q_pop    = 1'b0;
    if (!tx_busy) begin
      if (ev_start_q || ev_stop_q) begin
        tx_start = 1'b1;
        tx_len   = 3'd2;
        tx_w[0]  = dbg_hdr(8'(XTRIG_ID), 8'(ID));
        tx_w[1]  = dbg_type(DT_EVENT, {10'd0, ev_stop_q, ev_start_q});
      end else if (q_vld) begin
        tx_start = 1'b1;
        tx_len   = 3'd7;
        q_pop    = 1'b1;
        tx_w[0]  = dbg_hdr(8'(HOST_ID), 8'(ID));
        tx_w[1]  = dbg_type(DT_TRACE, drop_q);
        tx_w[2]  = q_head[79:64];
        tx_w[3]  = q_head[63:48];
        tx_w[4]  = q_head[47:32];
        tx_w[5]  = q_head[31:16];
        tx_w[6]  = q_head[15:0];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      armed_q     <= 1'b0;
      tracing_q   <= 1'b0;
      have_last_q <= 1'b0;
      start_pc_q  <= '0;
      stop_pc_q   <= '0;
      last_pc_q   <= '0;
      cnt_q       <= '0;
      drop_q      <= '0;
      ev_start_q  <= 1'b0;
      ev_stop_q   <= 1'b0;
    end else begin
      // trace stream
      if (trace_valid) begin
        tracing_q <= active;
        if (active) begin
          have_last_q <= 1'b1;
          last_pc_q   <= trace_pc;
          cnt_q       <= seq ? cnt_q + 16'd1 : 16'd0;
        end else begin
          have_last_q <= 1'b0;
        end
      end
      // events to the cross-trigger unit
      if (tx_start && (ev_start_q || ev_stop_q)) begin
        ev_start_q <= 1'b0;
        ev_stop_q  <= 1'b0;
      end
      if (start_hit) ev_start_q <= 1'b1;
      if (stop_hit)  ev_stop_q  <= 1'b1;
      // overflow bookkeeping
      if (q_pop) drop_q <= (emit && !q_ready) ? 12'd1 : 12'd0;
      else if (emit && !q_ready && drop_q != 12'hFFF) drop_q <= drop_q + 12'd1;
      // packets from the debug NoC
      if (rx_v && rx_type == DT_CONFIG) begin
        unique case (rx_arg)
          12'd0: begin
                   tracing_q <= rx_val[0];
                   if (!rx_val[0]) have_last_q <= 1'b0;
                   armed_q   <= rx_val[1];
                 end
          12'd1: start_pc_q[15:0]  <= rx_val;
          12'd2: start_pc_q[31:16] <= rx_val;
          12'd3: stop_pc_q[15:0]   <= rx_val;
          12'd4: stop_pc_q[31:16]  <= rx_val;
          default: ;
        endcase
      end
      if (rx_v && rx_type == DT_TRIGGER) begin
        if (rx_arg[0]) tracing_q <= 1'b1;
        if (rx_arg[1]) begin
          tracing_q   <= 1'b0;
          have_last_q <= 1'b0;
        end
      end
    end
  end

endmodule
