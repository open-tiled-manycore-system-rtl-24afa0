// Link statistics module: debug module attached to one LISNoC router that
// aggregates the usage of its output links.
//
// link_act[p] is high in each cycle a flit leaves the router on port p.
// While enabled, one 16-bit saturating counter per port counts these cycles
// over a window of WINDOW cycles (CONFIG reg 0, 0 = off). At the end of each
// window the counts are sent, time stamped, as one STATS packet to HOST_ID
// and cleared. If the previous packet is still being sent, the window's
// counts are dropped and the drop count goes with the next packet. CONFIG
// reg 1 bit 0 enables counting; TRIGGER packets start and stop it. The
// paper gives "aggregated link usage statistics" from routers; window,
// counter width and packet layout are this design's choice.
module dbg_link_stats
  import dbg_pkg::*;
#(
  parameter int unsigned ID      = 1,
  parameter int unsigned HOST_ID = 0,
  parameter int unsigned NPORTS  = 5
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [NPORTS-1:0] link_act,
  input  logic [31:0]       timestamp,
  output dflit_t            dbg_out,
  output logic              dbg_out_valid,
  input  logic              dbg_out_ready,
  input  dflit_t            dbg_in,
  input  logic              dbg_in_valid,
  output logic              dbg_in_ready,
  output logic              report_o     // pulse: a statistics packet was started
);

  localparam int unsigned W = NPORTS + 4;

  logic        rx_v;
  logic [7:0]  rx_src;
  logic [3:0]  rx_type;
  logic [11:0] rx_arg;
  logic [15:0] rx_val;
  dbg_pkt_rx u_rx (.clk, .rst, .in(dbg_in), .in_valid(dbg_in_valid), .in_ready(dbg_in_ready),
                   .pkt_valid(rx_v), .pkt_src(rx_src), .pkt_type(rx_type), .pkt_arg(rx_arg),
                   .pkt_value(rx_val));

  logic [15:0] window_q, tick_q;
  logic        en_q;
  logic [15:0] cnt_q [NPORTS];
  logic [11:0] drop_q;

  logic        tx_busy, tx_start;
  logic [$clog2(W+1)-1:0] tx_len;
  logic [15:0] tx_w [W];
  dbg_pkt_tx #(.MAXW(W)) u_tx (.clk, .rst, .start(tx_start), .len(tx_len), .words(tx_w),
                               .busy(tx_busy), .out(dbg_out), .out_valid(dbg_out_valid),
                               .out_ready(dbg_out_ready));

  wire window_end = en_q && window_q != 0 && tick_q == window_q - 16'd1;

  always_comb begin
    tx_start = window_end && !tx_busy;
    tx_len   = ($clog2(W+1))'(W);
    tx_w[0]  = dbg_hdr(8'(HOST_ID), 8'(ID));
    tx_w[1]  = dbg_type(DT_STATS, drop_q);
    tx_w[2]  = timestamp[31:16];
    tx_w[3]  = timestamp[15:0];
    for (int p = 0; p < NPORTS; p++) tx_w[4+p] = cnt_q[p];
  end
  assign report_o = tx_start;

  always_ff @(posedge clk) begin
    if (rst) begin
      window_q <= '0;
      tick_q   <= '0;
      en_q     <= 1'b0;
      drop_q   <= '0;
      for (int p = 0; p < NPORTS; p++) cnt_q[p] <= '0;
    end else begin
      if (en_q && window_q != 0) begin
        if (window_end) begin
          tick_q <= '0;
          for (int p = 0; p < NPORTS; p++) cnt_q[p] <= 16'(link_act[p]);
          if (tx_start) drop_q <= '0;
          else if (drop_q != 12'hFFF) drop_q <= drop_q + 12'd1;
        end else begin
          tick_q <= tick_q + 16'd1;
          for (int p = 0; p < NPORTS; p++)
            if (link_act[p] && cnt_q[p] != 16'hFFFF) cnt_q[p] <= cnt_q[p] + 16'd1;
        end
      end
      if (rx_v && rx_type == DT_CONFIG) begin
        if (rx_arg == 12'd0) window_q <= rx_val;
        if (rx_arg == 12'd1) en_q     <= rx_val[0];
        tick_q <= '0;
        for (int p = 0; p < NPORTS; p++) cnt_q[p] <= '0;
      end
      if (rx_v && rx_type == DT_TRIGGER) begin
        if (rx_arg[0]) en_q <= 1'b1;
        if (rx_arg[1]) en_q <= 1'b0;
      end
    end
  end

endmodule
