// Cross-trigger unit: combines trigger conditions of several debug modules
// and forwards the result to other debug modules.
//
// Debug modules report trigger conditions as EVENT packets (start and/or
// stop). The unit remembers, per kind, which source nodes (0..15) have
// fired. CONFIG reg 1 selects the source nodes that count (mask), reg 2 the
// destination nodes, reg 0 the combination: 0 = any selected source (OR),
// 1 = all selected sources (AND). When the condition holds, the remembered
// events of that kind are cleared and a TRIGGER packet of that kind is sent
// to every destination node in turn. Paper: "conditions can also be combined
// across different debug modules (cross-triggers)"; the OR/AND choice and
// the mask registers are this design's.
module dbg_cross_trigger
  import dbg_pkg::*;
#(
  parameter int unsigned ID = 1
) (
  input  logic   clk,
  input  logic   rst,
  output dflit_t dbg_out,
  output logic   dbg_out_valid,
  input  logic   dbg_out_ready,
  input  dflit_t dbg_in,
  input  logic   dbg_in_valid,
  output logic   dbg_in_ready,
  output logic   fire_o         // pulse: a combined trigger fired
);

  logic        rx_v;
  logic [7:0]  rx_src;
  logic [3:0]  rx_type;
  logic [11:0] rx_arg;
  logic [15:0] rx_val;
  dbg_pkt_rx u_rx (.clk, .rst, .in(dbg_in), .in_valid(dbg_in_valid), .in_ready(dbg_in_ready),
                   .pkt_valid(rx_v), .pkt_src(rx_src), .pkt_type(rx_type), .pkt_arg(rx_arg),
                   .pkt_value(rx_val));

  logic        mode_and_q;
  logic [15:0] src_mask_q, dst_mask_q;
  logic [15:0] fired_start_q, fired_stop_q;
  logic [15:0] pend_q;      // destinations still to notify
  logic [1:0]  kind_q;      // {stop, start} being sent
  logic [3:0]  dst_idx;
  logic        dst_any;

  function automatic logic cond(input logic [15:0] fired, input logic [15:0] mask, input logic all);
    return all ? (mask != 0 && (fired & mask) == mask) : ((fired & mask) != 0);
  endfunction

  wire c_start = cond(fired_start_q, src_mask_q, mode_and_q);
  wire c_stop  = cond(fired_stop_q,  src_mask_q, mode_and_q);
  wire idle    = (pend_q == '0);

  always_comb begin
    dst_any = 1'b0;
    dst_idx = '0;
    for (int i = 15; i >= 0; i--) begin
      if (pend_q[i]) begin
        dst_any = 1'b1;
        dst_idx = 4'(i);
      end
    end
  end

  logic        tx_busy, tx_start;
  logic [15:0] tx_w [2];
  dbg_pkt_tx #(.MAXW(2)) u_tx (.clk, .rst, .start(tx_start), .len(2'd2), .words(tx_w),
                               .busy(tx_busy), .out(dbg_out), .out_valid(dbg_out_valid),
                               .out_ready(dbg_out_ready));

  assign tx_start = dst_any && !tx_busy;
  assign tx_w[0]  = dbg_hdr({4'd0, dst_idx}, 8'(ID));
  assign tx_w[1]  = dbg_type(DT_TRIGGER, {10'd0, kind_q});
  assign fire_o   = idle && (c_start || c_stop) && dst_mask_q != 0;

  always_ff @(posedge clk) begin
    if (rst) begin
      mode_and_q    <= 1'b0;
      src_mask_q    <= '0;
      dst_mask_q    <= '0;
      fired_start_q <= '0;
      fired_stop_q  <= '0;
      pend_q        <= '0;
      kind_q        <= '0;
    end else begin
      if (tx_start) pend_q[dst_idx] <= 1'b0;
      if (fire_o) begin
        pend_q <= dst_mask_q;
        if (c_start) begin
          kind_q        <= 2'b01;
          fired_start_q <= '0;
        end else begin
          kind_q       <= 2'b10;
          fired_stop_q <= '0;
        end
      end
      if (rx_v && rx_type == DT_EVENT && rx_src < 8'd16) begin
        if (rx_arg[0]) fired_start_q[rx_src[3:0]] <= 1'b1;
        if (rx_arg[1]) fired_stop_q[rx_src[3:0]]  <= 1'b1;
      end
      if (rx_v && rx_type == DT_CONFIG) begin
        unique case (rx_arg)
          12'd0: mode_and_q <= rx_val[0];
          12'd1: src_mask_q <= rx_val;
          12'd2: dst_mask_q <= rx_val;
          default: ;
        endcase
      end
    end
  end

endmodule
